// sar_adc: behavioural model of the BITS-bit successive-approximation ADC.
//
// This is a behavioural model. The real part is a mixed-signal converter with
// a capacitive DAC and a comparator, one per ReRAM crossbar. The model keeps
// the SAR algorithm. It starts from zero and, from the MSB down, tentatively
// sets each bit. It keeps the bit if the trial code does not exceed the
// sampled input. The input is the crossbar bit-line sum in units of one
// cell-level step, so a code is the exact sum when the sum fits in BITS bits.
// A larger sum saturates at 2^BITS-1, and clip is raised with the code.
// Timing: when sample is high the conversion result is registered, so code
// and clip are valid on the cycle after sample. One conversion completes per
// cycle. The paper gives the ADC count and resolution (8 bits). The unit step,
// the one-cycle conversion and the clip flag are this model's choices.
module sar_adc #(
  parameter int unsigned BITS = 8,
  parameter int unsigned INW  = 9
) (
  input  logic            clk,
  input  logic            sample,
  input  logic [INW-1:0]  vin,
  output logic [BITS-1:0] code,
  output logic            clip
);

  function automatic logic [BITS-1:0] sar_convert(input logic [INW-1:0] v);
    logic [BITS-1:0] trial;
    logic [31:0]     t32, v32;
    trial = '0;
    v32   = 32'(v);
    for (int i = int'(BITS) - 1; i >= 0; i--) begin
      trial[i] = 1'b1;
      t32      = 32'(trial);
      if (t32 > v32) trial[i] = 1'b0;
    end
    return trial;
  endfunction

  always_ff @(posedge clk) begin
    if (sample) begin
      code <= sar_convert(vin);
      clip <= 32'(vin) > 32'((1 << BITS) - 1);
    end
  end

endmodule
