// tb_reram_tile: bit-serial MVM of a reduced ReRAM tile against a reference.
// The tile has 2 crossbars of 128 rows x 16 columns, 2-bit cells and 4 words
// per row, with a write latency of 5 cycles. Weights and inputs are random.
// The reference is computed independently. For every input bit and cell
// slice it forms the column sum, saturates it at 255 like the 8-bit ADC,
// and adds it with the slice and bit shifts. Two runs are made. The first
// is random. The second uses all-ones weights and inputs, so every column sum
// (384) clips and clip_count must grow. Also checked: the result order, the
// first result exactly XBITS*COLS+4 cycles after start, and write spacing
// equal to WR_LAT.
module tb_reram_tile;
  import hepga_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int XB = 2, ROWS = 128, COLS = 16, CB = 2, WR_LAT = 5;
  localparam int SL = 8 / CB, WORDS = COLS / SL;

  logic rst_n, w_valid, w_ready, x_valid, x_ready, start, busy, r_valid, r_ready;
  wreq_t w_req;
  xreq_t x_req;
  result_t r_out;
  logic [15:0] clip_count;
  logic [7:0] W [XB][ROWS][WORDS];
  logic [7:0] X [ROWS];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  reram_tile #(.XBARS(XB), .ROWS(ROWS), .COLS(COLS), .CELL_BITS(CB), .WR_LAT(WR_LAT)) dut (
    .clk(clk), .rst_n(rst_n), .w_valid(w_valid), .w_ready(w_ready), .w_req(w_req),
    .x_valid(x_valid), .x_ready(x_ready), .x_req(x_req), .start(start), .busy(busy),
    .r_valid(r_valid), .r_ready(r_ready), .r_out(r_out), .clip_count(clip_count));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_out(int x, int w);
    longint acc = 0;
    for (int b = 0; b < 8; b++)
      for (int s = 0; s < SL; s++) begin
        int sum = 0;
        for (int r = 0; r < ROWS; r++)
          if (X[r][b]) sum += int'(W[x][r][w][s*CB +: CB]);
        if (sum > 255) sum = 255;
        acc += longint'(sum) << (b + CB * s);
      end
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
    if (cyc - t0 != 8 * COLS + 4) begin
      failures++;
      $display("latency %0d, expected %0d", cyc - t0, 8 * COLS + 4);
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
    checks++;
    if (clip_count < 16'(XB * COLS * 8)) begin
      failures++;
      $display("clip_count %0d, expected at least %0d", clip_count, XB * COLS * 8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
