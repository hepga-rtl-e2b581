// tb_sense_amp: random bit-line levels against the reference comparison.
// Each output bit must be 1 exactly when its level exceeds VREF, and the
// outputs must hold while en is low.
module tb_sense_amp;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 16;
  logic                 en;
  logic [N-1:0][7:0]    level;
  logic [N-1:0]         q, exp_q;
  int checks = 0, failures = 0;

  sense_amp #(.N(N), .LEVELW(8), .VREF(112)) dut (.clk(clk), .en(en), .level(level), .q(q));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1'b0;
    level = '0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      en = 1'b1;
      for (int i = 0; i < N; i++) begin
        level[i] = (t < 2) ? 8'(111 + t + i % 2) : 8'($urandom_range(0, 255));
        exp_q[i] = level[i] > 8'd112;
      end
      @(negedge clk);
      checks++;
      if (q != exp_q) begin
        failures++;
        $display("mismatch t=%0d q=%h exp=%h", t, q, exp_q);
      end
      en = 1'b0;
      level = ~level;
      @(negedge clk);
      checks++;
      if (q != exp_q) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
