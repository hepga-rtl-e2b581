// reram_tile: ReRAM processing-in-memory tile (XBARS crossbars, one SAR ADC each).
//
// The tile computes y = W^T x on all of its crossbars at once. Every crossbar
// holds a different block of output columns of W and sees the same input
// vector x. Weights have WBITS bits and are split into WBITS/CELL_BITS
// slices of CELL_BITS bits. The slices sit in adjacent columns, least
// significant slice first. So a 128-column crossbar with 2-bit cells holds
// 32 weight words per row.
// Inputs have XBITS bits and enter bit-serially through the 1-bit wordline
// DACs. For input bit b and column c, every crossbar produces the bit-line
// sum of column c. Its own ADC digitizes the sum, and shift-and-add logic
// adds code << (b + CELL_BITS*slice) into the accumulator of that column's
// weight word. One column of every crossbar is converted per cycle, so a full
// MVM takes XBITS*COLS cycles. ADC codes that saturate are counted on
// clip_count.
// Interface:
//   w_valid/w_ready/w_req   program one weight word. After an accepted write,
//                           w_ready stays low for WR_LAT cycles, which models
//                           the ReRAM write latency (about 100 ns, 100 cycles
//                           at an assumed 1 GHz).
//   x_valid/x_ready/x_req   write one input element into the input buffer.
//   start                   begin an MVM. It is accepted only while busy is low.
//   r_valid/r_ready/r_out   stream of the XBARS*WORDS results, index
//                           xbar*WORDS + word, in ascending order.
// Timing: the cycle after start is accepted, the first column is issued. The
// first result is offered MVM_CYCLES = XBITS*COLS + 4 cycles after the cycle in which start is accepted.
// The paper gives 96 crossbars of 128x128 cells, 2 bits per cell, 96 8-bit
// SAR ADCs and 1-bit DACs. The word layout, input bit-serial order,
// column-serial ADC schedule, accumulator width and result order are this
// design's choices. Values are unsigned.
module reram_tile
  import hepga_pkg::*;
#(
  parameter int unsigned XBARS     = 96,
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned ADC_BITS  = 8,
  parameter int unsigned WR_LAT    = 100
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
  output result_t     r_out,
  output logic [15:0] clip_count
);

  localparam int unsigned SLICES = WBITS / CELL_BITS;
  localparam int unsigned WORDS  = COLS / SLICES;
  localparam int unsigned NOUT   = XBARS * WORDS;
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned CW     = $clog2(COLS);
  localparam int unsigned BW     = $clog2(XBITS);
  localparam int unsigned SUMW   = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1);
  localparam int unsigned LW     = (WR_LAT > 1) ? $clog2(WR_LAT) : 1;

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_DRAIN, S_OUT} state_t;

  state_t              state;
  logic [XBITS-1:0]    xbuf [ROWS];
  logic [ACCW-1:0]     acc  [XBARS][WORDS];
  logic [BW-1:0]       bit_q, bit1, bit2;
  logic [CW-1:0]       col_q, col1, col2;
  logic                v1, v2;
  logic [LW-1:0]       wr_cnt;
  logic [11:0]         out_idx;
  logic [ROWS-1:0]     dac;
  logic [SUMW-1:0]     sum  [XBARS];
  logic [ADC_BITS-1:0] code [XBARS];
  logic [XBARS-1:0]    clip;
  logic                issue;

  assign w_ready = (state == S_IDLE) && (wr_cnt == '0);
  assign x_ready = (state == S_IDLE);
  assign busy    = (state != S_IDLE) || (wr_cnt != '0);
  assign issue   = (state == S_MAC);

  // 1-bit DACs: wordline r carries bit bit_q of input element r.
  always_comb
    for (int r = 0; r < ROWS; r++) dac[r] = xbuf[r][bit_q];

  for (genvar g = 0; g < XBARS; g++) begin : g_xbar
    pim_crossbar #(
      .ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .WR_CELLS(SLICES)
    ) u_xbar (
      .clk      (clk),
      .wr_en    (w_valid && w_ready && w_req.xbar == 7'(g)),
      .wr_row   (w_req.row[RW-1:0]),
      .wr_col   (CW'(w_req.word * SLICES)),
      .wr_data  (w_req.data),
      .mac_en   (issue),
      .mac_in   (dac),
      .mac_col  (col_q),
      .mac_sum  (sum[g]),
      .rd_en    (1'b0),
      .rd_row   ('0),
      .rd_level ()
    );
    sar_adc #(.BITS(ADC_BITS), .INW(SUMW)) u_adc (
      .clk    (clk),
      .sample (v1),
      .vin    (sum[g]),
      .code   (code[g]),
      .clip   (clip[g])
    );
  end

  always_ff @(posedge clk) begin
    if (x_valid && x_ready) xbuf[x_req.row[RW-1:0]] <= x_req.data;
  end

  // Shift-and-add accumulation.
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start && !busy) begin
      for (int x = 0; x < XBARS; x++)
        for (int w = 0; w < WORDS; w++) acc[x][w] <= '0;
    end else if (v2) begin
      for (int x = 0; x < XBARS; x++)
        acc[x][col2 / CW'(SLICES)] <= acc[x][col2 / CW'(SLICES)]
          + (ACCW'(code[x]) << (int'(bit2) + CELL_BITS * int'(col2 % CW'(SLICES))));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      bit_q      <= '0;
      col_q      <= '0;
      v1         <= 1'b0;
      v2         <= 1'b0;
      bit1       <= '0;
      bit2       <= '0;
      col1       <= '0;
      col2       <= '0;
      wr_cnt     <= '0;
      out_idx    <= '0;
      clip_count <= '0;
    end else begin
      v1   <= issue;
      bit1 <= bit_q;
      col1 <= col_q;
      v2   <= v1;
      bit2 <= bit1;
      col2 <= col1;
      if (wr_cnt != '0) wr_cnt <= wr_cnt - 1'b1;
      else if (w_valid && w_ready) wr_cnt <= LW'(WR_LAT - 1);
      if (v2) begin
        logic [15:0] n;
        n = '0;
        for (int x = 0; x < XBARS; x++) n = n + 16'(clip[x]);
        clip_count <= clip_count + n;
      end
      case (state)
        S_IDLE: if (start && !busy) begin
          state <= S_MAC;
          bit_q <= '0;
          col_q <= '0;
        end
        S_MAC: begin
          if (col_q == CW'(COLS - 1)) begin
            col_q <= '0;
            if (bit_q == BW'(XBITS - 1)) state <= S_DRAIN;
            else bit_q <= bit_q + 1'b1;
          end else begin
            col_q <= col_q + 1'b1;
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
