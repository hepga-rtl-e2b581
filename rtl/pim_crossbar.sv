// pim_crossbar: behavioural model of one analog processing-in-memory crossbar.
//
// This is a behavioural model. A real crossbar is an analog array of ReRAM,
// FeFET or 6T-SRAM cells, and here only its digital behaviour is modelled.
// The array holds ROWS x COLS cells of CELL_BITS bits each. Row r is stored
// as one packed vector, and column c occupies bits [c*CELL_BITS +: CELL_BITS].
// There are three operations, all registered on the rising clock edge:
//   * write:  wr_en programs WR_CELLS adjacent cells of row wr_row, starting
//             at column wr_col, from wr_data. The lowest cell comes from the
//             lowest bits.
//   * MAC:    mac_en drives every wordline with its 1-bit input mac_in[r].
//             This is the 1-bit DAC of the paper's ReRAM tile. The ideal
//             bit-line sum of column mac_col, sum_r mac_in[r]*cell[r][col],
//             appears on mac_sum one cycle later.
//   * read:   rd_en activates the single wordline rd_row. Each bit line then
//             settles to a level between G_OFF and G_ON, in proportion to the
//             stored cell value. rd_level shows these levels one cycle later,
//             and a sense amplifier resolves them.
// The array sizes and bits per cell follow the tile table of the HePGA paper.
// The level codes G_OFF/G_ON and the one-column-per-cycle MAC readout are
// this model's own choices. The model has no device noise.
module pim_crossbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned WR_CELLS  = 4,
  parameter int unsigned LEVELW    = 8,
  parameter int unsigned G_OFF     = 16,
  parameter int unsigned G_ON      = 208,
  localparam int unsigned RW       = $clog2(ROWS),
  localparam int unsigned CW       = $clog2(COLS),
  localparam int unsigned SUMW     = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                             clk,
  input  logic                             wr_en,
  input  logic [RW-1:0]                    wr_row,
  input  logic [CW-1:0]                    wr_col,
  input  logic [WR_CELLS*CELL_BITS-1:0]    wr_data,
  input  logic                             mac_en,
  input  logic [ROWS-1:0]                  mac_in,
  input  logic [CW-1:0]                    mac_col,
  output logic [SUMW-1:0]                  mac_sum,
  input  logic                             rd_en,
  input  logic [RW-1:0]                    rd_row,
  output logic [COLS-1:0][LEVELW-1:0]      rd_level
);

  localparam int unsigned CMAX = (1 << CELL_BITS) - 1;

  logic [COLS*CELL_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_row][wr_col*CELL_BITS +: WR_CELLS*CELL_BITS] <= wr_data;
  end

  // Bit-line current summation of one column.
  always_ff @(posedge clk) begin
    if (mac_en) begin
      logic [SUMW-1:0] s;
      s = '0;
      for (int r = 0; r < ROWS; r++)
        if (mac_in[r]) s = s + SUMW'(mem[r][mac_col*CELL_BITS +: CELL_BITS]);
      mac_sum <= s;
    end
  end

  // Single-row read: bit-line levels for the sense amplifiers.
  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int c = 0; c < COLS; c++)
        rd_level[c] <= LEVELW'(G_OFF + (int'(mem[rd_row][c*CELL_BITS +: CELL_BITS]) * (G_ON - G_OFF)) / CMAX);
    end
  end

endmodule
