// sram_tile: SRAM processing-in-memory tile (ARRAYS 6T arrays, one shared S/A row).
//
// In HePGA the SRAM tier computes the gradients of backpropagation. These need
// many writes, and SRAM has the endurance and write speed for them. The tile
// has ARRAYS arrays of ROWS x COLS 1-bit cells. A weight word of WBITS bits
// sits in WBITS adjacent cells, least significant bit first.
// The tile has one row of COLS sense amplifiers shared by all arrays, so one
// array computes at a time. The array is chosen by sel when start is
// accepted, and the address decoder turns the index into a one-hot array
// select. For input bit b and row r, the selected array reads row r. If
// bit b of input element r is 1, every word of the row, shifted left by b,
// is added to its accumulator. A run takes XBITS*ROWS cycles and yields
// WORDS results, with index sel*WORDS + word.
// Interface: as reram_tile, plus sel (array index for writes comes from
// w_req.xbar). w_ready stays low for WR_LAT cycles after a write. The default
// of 1 models an SRAM write of about 1 ns at an assumed 1 GHz.
// Timing: the first result is offered XBITS*ROWS + 4 cycles after start.
// The paper gives nine 256x256 (8 KB) arrays of 1-bit 6T cells, 256 S/As and
// the row/column decoders. The shared-S/A schedule and word layout are this
// design's choices. Values are unsigned.
module sram_tile
  import hepga_pkg::*;
#(
  parameter int unsigned ARRAYS = 9,
  parameter int unsigned ROWS   = 256,
  parameter int unsigned COLS   = 256,
  parameter int unsigned WR_LAT = 1,
  localparam int unsigned AW    = (ARRAYS > 1) ? $clog2(ARRAYS) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        w_valid,
  output logic        w_ready,
  input  wreq_t       w_req,
  input  logic        x_valid,
  output logic        x_ready,
  input  xreq_t       x_req,
  input  logic        start,
  input  logic [AW-1:0] sel,
  output logic        busy,
  output logic        r_valid,
  input  logic        r_ready,
  output result_t     r_out
);

  localparam int unsigned WORDS  = COLS / WBITS;
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned CW     = $clog2(COLS);
  localparam int unsigned BW     = $clog2(XBITS);
  localparam int unsigned LW     = (WR_LAT > 1) ? $clog2(WR_LAT) : 1;
  localparam int unsigned LEVELW = 8;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_DRAIN, S_OUT} state_t;

  state_t           state;
  logic [XBITS-1:0] xbuf [ROWS];
  logic [ACCW-1:0]  acc  [WORDS];
  logic [AW-1:0]    arr_q;
  logic [BW-1:0]    bit_q, bit1, bit2;
  logic [RW-1:0]    row_q;
  logic             xb1, xb2;
  logic             v1, v2;
  logic [LW-1:0]    wr_cnt;
  logic [11:0]      out_idx;
  logic             issue;
  logic [ARRAYS-1:0] wr_sel, rd_sel;
  logic [COLS-1:0][LEVELW-1:0] level [ARRAYS];
  logic [COLS-1:0][LEVELW-1:0] bitline;
  logic [COLS-1:0]             sa;

  assign w_ready = (state == S_IDLE) && (wr_cnt == '0);
  assign x_ready = (state == S_IDLE);
  assign busy    = (state != S_IDLE) || (wr_cnt != '0);
  assign issue   = (state == S_READ);

  addr_decoder #(.N(ARRAYS)) u_wr_dec (
    .en   (w_valid && w_ready),
    .addr (w_req.xbar[AW-1:0]),
    .sel  (wr_sel)
  );
  addr_decoder #(.N(ARRAYS)) u_rd_dec (
    .en   (issue),
    .addr (arr_q),
    .sel  (rd_sel)
  );

  for (genvar g = 0; g < ARRAYS; g++) begin : g_arr
    pim_crossbar #(
      .ROWS(ROWS), .COLS(COLS), .CELL_BITS(1), .WR_CELLS(WBITS), .LEVELW(LEVELW)
    ) u_array (
      .clk      (clk),
      .wr_en    (wr_sel[g]),
      .wr_row   (w_req.row[RW-1:0]),
      .wr_col   (CW'(w_req.word * WBITS)),
      .wr_data  (w_req.data),
      .mac_en   (1'b0),
      .mac_in   ('0),
      .mac_col  ('0),
      .mac_sum  (),
      .rd_en    (rd_sel[g]),
      .rd_row   (row_q),
      .rd_level (level[g])
    );
  end

  // Shared bit lines into the single S/A row: the array read last cycle.
  logic [AW-1:0] arr1;
  assign bitline = level[arr1];

  sense_amp #(.N(COLS), .LEVELW(LEVELW)) u_sa (
    .clk   (clk),
    .en    (v1),
    .level (bitline),
    .q     (sa)
  );

  always_ff @(posedge clk) begin
    if (x_valid && x_ready) xbuf[x_req.row[RW-1:0]] <= x_req.data;
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start && !busy) begin
      for (int w = 0; w < WORDS; w++) acc[w] <= '0;
    end else if (v2 && xb2) begin
      for (int w = 0; w < WORDS; w++)
        acc[w] <= acc[w] + (ACCW'(sa[w*WBITS +: WBITS]) << bit2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      arr_q   <= '0;
      arr1    <= '0;
      bit_q   <= '0;
      row_q   <= '0;
      v1      <= 1'b0;
      v2      <= 1'b0;
      bit1    <= '0;
      bit2    <= '0;
      xb1     <= 1'b0;
      xb2     <= 1'b0;
      wr_cnt  <= '0;
      out_idx <= '0;
    end else begin
      v1   <= issue;
      arr1 <= arr_q;
      bit1 <= bit_q;
      xb1  <= xbuf[row_q][bit_q];
      v2   <= v1;
      bit2 <= bit1;
      xb2  <= xb1;
      if (wr_cnt != '0) wr_cnt <= wr_cnt - 1'b1;
      else if (w_valid && w_ready) wr_cnt <= LW'(WR_LAT - 1);
      case (state)
        S_IDLE: if (start && !busy) begin
          state <= S_READ;
          arr_q <= sel;
          bit_q <= '0;
          row_q <= '0;
        end
        S_READ: begin
          if (row_q == RW'(ROWS - 1)) begin
            row_q <= '0;
            if (bit_q == BW'(XBITS - 1)) state <= S_DRAIN;
            else bit_q <= bit_q + 1'b1;
          end else begin
            row_q <= row_q + 1'b1;
          end
        end
        S_DRAIN: if (!v1 && !v2) begin
          state   <= S_OUT;
          out_idx <= '0;
        end
        S_OUT: if (r_ready) begin
          if (out_idx == 12'(WORDS - 1)) state <= S_IDLE;
          out_idx <= out_idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign r_valid    = (state == S_OUT);
  assign r_out.idx  = 12'(arr_q) * 12'(WORDS) + out_idx;
  assign r_out.data = acc[out_idx[$clog2(WORDS)-1:0]];

endmodule
