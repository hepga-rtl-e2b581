// tb_fefet_tile: MVM of a reduced FeFET tile against an exact dot product.
// The tile has 3 crossbars of 32 rows x 32 columns, 1-bit cells, 4 words per
// row and a write latency of 3. Weights and inputs are random, plus a run
// with all-ones data, the largest sums. Every result must equal
// sum_r x[r]*w[r][word], since the 1-bit sense amplifiers read exact cell
// values. Also checked: the result index order, the first result
// XBITS*ROWS+4 cycles after start, and write spacing of WR_LAT cycles.
module tb_fefet_tile;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int XB = 3, ROWS = 32, COLS = 32, WR_LAT = 3;
  localparam int WORDS = COLS / 8;

  logic rst_n, w_valid, w_ready, x_valid, x_ready, start, busy, r_valid, r_ready;
  wreq_t w_req;
  xreq_t x_req;
  result_t r_out;
  logic [7:0] W [XB][ROWS][WORDS];
  logic [7:0] X [ROWS];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  fefet_tile #(.XBARS(XB), .ROWS(ROWS), .COLS(COLS), .WR_LAT(WR_LAT)) dut (
    .clk(clk), .rst_n(rst_n), .w_valid(w_valid), .w_ready(w_ready), .w_req(w_req),
    .x_valid(x_valid), .x_ready(x_ready), .x_req(x_req), .start(start), .busy(busy),
    .r_valid(r_valid), .r_ready(r_ready), .r_out(r_out));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_out(int x, int w);
    longint acc = 0;
    for (int r = 0; r < ROWS; r++) acc += longint'(X[r]) * longint'(W[x][r][w]);
    return acc;
  endfunction

  task automatic load_data(input bit all_ones);
    int last_acc;
    last_acc = -1;
    for (int x = 0; x < XB; x++)
      for (int r = 0; r < ROWS; r++)
        for (int w = 0; w < WORDS; w++) begin
          W[x][r][w] = all_ones ? 8'hFF : 8'($urandom);
          @(negedge clk);
          w_valid    = 1'b1;
          w_req.xbar = 7'(x);
          w_req.row  = 9'(r);
          w_req.word = 6'(w);
          w_req.data = W[x][r][w];
          @(posedge clk);
          while (!w_ready) @(posedge clk);
          if (last_acc >= 0 && x == 0 && r == 0 && w == 1) begin
            checks++;
            if (cyc - last_acc != WR_LAT) begin
              failures++;
              $display("write spacing %0d, expected %0d", cyc - last_acc, WR_LAT);
            end
          end
          last_acc = cyc;
        end
    @(negedge clk);
    w_valid = 1'b0;
    for (int r = 0; r < ROWS; r++) begin
      X[r] = all_ones ? 8'hFF : 8'($urandom);
      x_valid    = 1'b1;
      x_req.row  = 9'(r);
      x_req.data = X[r];
      @(negedge clk);
    end
    x_valid = 1'b0;
  endtask

  task automatic run_and_check();
    int t0, n;
    while (busy) @(negedge clk);
    start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!r_valid) @(negedge clk);
    checks++;
    if (cyc - t0 != 8 * ROWS + 4) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - t0, 8 * ROWS + 4);
    end
    n = 0;
    while (n < XB * WORDS) begin
      r_ready = 1'($urandom);
      if (r_valid && r_ready) begin
        longint e;
        e = ref_out(n / WORDS, n % WORDS);
        checks++;
        if (r_out.idx != 12'(n) || longint'(r_out.data) != e) begin
          failures++;
          $display("result %0d: idx=%0d got=%0d exp=%0d", n, r_out.idx, r_out.data, e);
        end
        n++;
      end
      @(negedge clk);
    end
    r_ready = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; w_valid = 1'b0; x_valid = 1'b0; start = 1'b0; r_ready = 1'b0;
    w_req = '0; x_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_data(1'b0);
    run_and_check();
    load_data(1'b1);
    run_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
