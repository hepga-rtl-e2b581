// addr_decoder: binary-to-one-hot decoder.
//
// When en is high, output bit addr of sel is set and all others are clear.
// An address N or above selects nothing. When en is low, sel is zero. The
// decoder is purely combinational. The SRAM tile uses it to pick one of its
// nine arrays for a write or a compute read, which is the role of the tile's
// row/column decoders. The one-hot form is this design's choice.
module addr_decoder #(
  parameter int unsigned N  = 9,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [N-1:0]  sel
);

  always_comb begin
    sel = '0;
    for (int i = 0; i < N; i++)
      if (en && addr == AW'(i)) sel[i] = 1'b1;
  end

endmodule
