// tb_sar_adc: exhaustive check of the 8-bit SAR ADC model.
// Every input from 0 to 511 is sampled. The code must equal the input, or
// 255 when the input does not fit in 8 bits, and clip must mark exactly
// those inputs. code must not change on cycles without sample.
module tb_sar_adc;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       sample;
  logic [8:0] vin;
  logic [7:0] code;
  logic       clip;
  int checks = 0, failures = 0;

  sar_adc #(.BITS(8), .INW(9)) dut (.clk(clk), .sample(sample), .vin(vin), .code(code), .clip(clip));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = 1'b0;
    vin    = '0;
    for (int v = 0; v < 512; v++) begin
      @(negedge clk);
      sample = 1'b1;
      vin    = 9'(v);
      @(negedge clk);
      checks++;
      if (code != ((v > 255) ? 8'd255 : 8'(v)) || clip != (v > 255)) begin
        failures++;
        $display("mismatch vin=%0d code=%0d clip=%0d", v, code, clip);
      end
    end
    // Hold: no sample, code keeps its value.
    sample = 1'b1;
    vin    = 9'd77;
    @(negedge clk);
    sample = 1'b0;
    vin    = 9'd3;
    repeat (3) @(negedge clk);
    checks++;
    if (code != 8'd77) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
