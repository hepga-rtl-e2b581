// fefet_tile: FeFET processing-in-memory tile (XBARS crossbars of 1-bit cells).
//
// The tile computes y = W^T x on all crossbars at once, each crossbar holding a
// different block of output columns. A weight word of WBITS bits sits in
// WBITS adjacent 1-bit cells of one row, least significant bit first. So a
// 256-column crossbar holds 32 words per row.
// Each crossbar column has its own 1-bit sense amplifier (S/A), and a 1-bit
// S/A can only tell a cell's two states apart. So the tile activates one
// wordline at a time. For input bit b and row r, every crossbar reads row r
// through its COLS S/As. If bit b of input element r is 1, each weight word
// read from that row is added, shifted left by b, into that word's
// accumulator. A full MVM takes XBITS*ROWS cycles, all crossbars in
// parallel.
// Interface (same as reram_tile):
//   w_valid/w_ready/w_req   program one weight word. w_ready stays low for
//                           WR_LAT cycles after each write, which models the
//                           FeFET write latency (about 3 ns, 3 cycles at an
//                           assumed 1 GHz).
//   x_valid/x_ready/x_req   write one input element.
//   start / busy            begin an MVM when busy is low.
//   r_valid/r_ready/r_out   XBARS*WORDS results, index xbar*WORDS + word.
// Timing: the first result is offered MVM_CYCLES = XBITS*ROWS + 4 cycles
// after start.
// The paper gives 48 crossbars of 256x256, 1 bit per cell and 256x48 1-bit
// S/As. The row-serial read schedule, the word layout and the
// reference level are this design's choices. Values are unsigned.
module fefet_tile
  import hepga_pkg::*;
#(
  parameter int unsigned XBARS  = 48,
  parameter int unsigned ROWS   = 256,
  parameter int unsigned COLS   = 256,
  parameter int unsigned WR_LAT = 3
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
  output logic        busy,
  output logic        r_valid,
  input  logic        r_ready,
  output result_t     r_out
);

  localparam int unsigned WORDS  = COLS / WBITS;
  localparam int unsigned NOUT   = XBARS * WORDS;
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned CW     = $clog2(COLS);
  localparam int unsigned BW     = $clog2(XBITS);
  localparam int unsigned LW     = (WR_LAT > 1) ? $clog2(WR_LAT) : 1;
  localparam int unsigned LEVELW = 8;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_DRAIN, S_OUT} state_t;

  state_t           state;
  logic [XBITS-1:0] xbuf [ROWS];
  logic [ACCW-1:0]  acc  [XBARS][WORDS];
  logic [BW-1:0]    bit_q, bit1, bit2;
  logic [RW-1:0]    row_q;
  logic             xb1, xb2;
  logic             v1, v2;
  logic [LW-1:0]    wr_cnt;
  logic [11:0]      out_idx;
  logic             issue;
  logic [COLS-1:0][LEVELW-1:0] level [XBARS];
  logic [COLS-1:0]             sa    [XBARS];

  assign w_ready = (state == S_IDLE) && (wr_cnt == '0);
  assign x_ready = (state == S_IDLE);
  assign busy    = (state != S_IDLE) || (wr_cnt != '0);
  assign issue   = (state == S_READ);

  for (genvar g = 0; g < XBARS; g++) begin : g_xbar
    pim_crossbar #(
      .ROWS(ROWS), .COLS(COLS), .CELL_BITS(1), .WR_CELLS(WBITS), .LEVELW(LEVELW)
    ) u_xbar (
      .clk      (clk),
      .wr_en    (w_valid && w_ready && w_req.xbar == 7'(g)),
      .wr_row   (w_req.row[RW-1:0]),
      .wr_col   (CW'(w_req.word * WBITS)),
      .wr_data  (w_req.data),
      .mac_en   (1'b0),
      .mac_in   ('0),
      .mac_col  ('0),
      .mac_sum  (),
      .rd_en    (issue),
      .rd_row   (row_q),
      .rd_level (level[g])
    );
    sense_amp #(.N(COLS), .LEVELW(LEVELW)) u_sa (
      .clk   (clk),
      .en    (v1),
      .level (level[g]),
      .q     (sa[g])
    );
  end

  always_ff @(posedge clk) begin
    if (x_valid && x_ready) xbuf[x_req.row[RW-1:0]] <= x_req.data;
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start && !busy) begin
      for (int x = 0; x < XBARS; x++)
        for (int w = 0; w < WORDS; w++) acc[x][w] <= '0;
    end else if (v2 && xb2) begin
      for (int x = 0; x < XBARS; x++)
        for (int w = 0; w < WORDS; w++)
          acc[x][w] <= acc[x][w] + (ACCW'(sa[x][w*WBITS +: WBITS]) << bit2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
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
          if (out_idx == 12'(NOUT - 1)) state <= S_IDLE;
          out_idx <= out_idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign r_valid    = (state == S_OUT);
  assign r_out.idx  = out_idx;
  assign r_out.data = acc[out_idx / 12'(WORDS)][out_idx % 12'(WORDS)];

endmodule
