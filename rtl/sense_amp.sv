// sense_amp: behavioural model of a row of N 1-bit sense amplifiers.
//
// This is a behavioural model. A sense amplifier is an analog latch comparator.
// Here each bit-line level (an LEVELW-bit code) is compared with the reference
// VREF, and the result bit is registered when en is high. It is valid on the
// next cycle. FeFET tiles use one row of these per crossbar (256 x 48 in a
// tile), and an SRAM tile uses one shared row of 256. The reference is a
// parameter. The default is midway between the crossbar's default OFF and ON
// levels, which is this design's choice.
module sense_amp #(
  parameter int unsigned N      = 256,
  parameter int unsigned LEVELW = 8,
  parameter int unsigned VREF   = 112
) (
  input  logic                   clk,
  input  logic                   en,
  input  logic [N-1:0][LEVELW-1:0] level,
  output logic [N-1:0]           q
);

  always_ff @(posedge clk) begin
    if (en)
      for (int i = 0; i < N; i++) q[i] <= (level[i] > LEVELW'(VREF));
  end

endmodule
