// tb_sram_tile: MVM on selected arrays of a reduced SRAM tile.
// The tile has 3 arrays of 32 rows x 32 columns and a write latency of 1.
// Each array holds different random weights. The tile runs on array 2, then
// on array 0, then on array 1. Each result must equal
// sum_r x[r]*w_sel[r][word], with index sel*WORDS + word. This shows that the
// decoder and the shared sense-amplifier row pick the right array. Writes must
// be accepted back to back, and the first result must come XBITS*ROWS+4
// cycles after start.
module tb_sram_tile;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NA = 3, ROWS = 32, COLS = 32, WR_LAT = 1;
  localparam int WORDS = COLS / 8;

  logic rst_n, w_valid, w_ready, x_valid, x_ready, start, busy, r_valid, r_ready;
  logic [1:0] sel;
  wreq_t w_req;
  xreq_t x_req;
  result_t r_out;
  logic [7:0] W [NA][ROWS][WORDS];
  logic [7:0] X [ROWS];
  int checks = 0, failures = 0;
  int cyc = 0;
  int nwr = 0;
  always @(posedge clk) begin
    cyc++;
    if (w_valid && w_ready) nwr++;
  end

  sram_tile #(.ARRAYS(NA), .ROWS(ROWS), .COLS(COLS), .WR_LAT(WR_LAT)) dut (
    .clk(clk), .rst_n(rst_n), .w_valid(w_valid), .w_ready(w_ready), .w_req(w_req),
    .x_valid(x_valid), .x_ready(x_ready), .x_req(x_req), .start(start), .sel(sel), .busy(busy),
    .r_valid(r_valid), .r_ready(r_ready), .r_out(r_out));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_out(int a, int w);
    longint acc = 0;
    for (int r = 0; r < ROWS; r++) acc += longint'(X[r]) * longint'(W[a][r][w]);
    return acc;
  endfunction

  task automatic run_and_check(input int a);
    int t0, n;
    while (busy) @(negedge clk);
    start = 1'b1;
    sel   = 2'(a);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    sel   = 2'(($urandom % 3));
    while (!r_valid) @(negedge clk);
    checks++;
    if (cyc - t0 != 8 * ROWS + 4) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - t0, 8 * ROWS + 4);
    end
    n = 0;
    while (n < WORDS) begin
      r_ready = 1'($urandom);
      if (r_valid && r_ready) begin
        longint e;
        e = ref_out(a, n);
        checks++;
        if (r_out.idx != 12'(a * WORDS + n) || longint'(r_out.data) != e) begin
          failures++;
          $display("array %0d result %0d: idx=%0d got=%0d exp=%0d", a, n, r_out.idx, r_out.data, e);
        end
        n++;
      end
      @(negedge clk);
    end
    r_ready = 1'b0;
  endtask

  initial begin
    int t0;
    rst_n = 1'b0; w_valid = 1'b0; x_valid = 1'b0; start = 1'b0; r_ready = 1'b0; sel = '0;
    w_req = '0; x_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    t0 = cyc;
    w_valid = 1'b1;
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < ROWS; r++)
        for (int w = 0; w < WORDS; w++) begin
          W[a][r][w] = (a == 1 && r == 0) ? 8'hFF : 8'($urandom);
          w_req.xbar = 7'(a);
          w_req.row  = 9'(r);
          w_req.word = 6'(w);
          w_req.data = W[a][r][w];
          @(negedge clk);
        end
    w_valid = 1'b0;
    checks++;
    if (nwr != NA * ROWS * WORDS || cyc - t0 != NA * ROWS * WORDS) begin
      failures++;
      $display("writes %0d in %0d cycles", nwr, cyc - t0);
    end
    for (int r = 0; r < ROWS; r++) begin
      X[r] = 8'($urandom);
      x_valid    = 1'b1;
      x_req.row  = 9'(r);
      x_req.data = X[r];
      @(negedge clk);
    end
    x_valid = 1'b0;
    run_and_check(2);
    run_and_check(0);
    run_and_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
