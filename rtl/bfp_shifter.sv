// bfp_shifter: the block-floating-point "data bitshift (L/R)".
//
// All LANES words of a butterfly result are shifted by the same signed
// amount: right (arithmetic, truncating) when shamt > 0, left when
// shamt < 0, then saturated from IW to OW bits. With post-butterfly
// normalisation the amount is the block shift of the current stage, derived
// from the leading bit of the previous stage's results, so the guard bits
// kept in OW absorb the growth of two successive stages. Combinational.
module bfp_shifter #(
  parameter int LANES = 4,
  parameter int IW    = 19,
  parameter int OW    = 16,
  parameter int SW    = 6
) (
  input  logic signed [SW-1:0]           shamt,
  input  logic        [LANES-1:0][IW-1:0] din,
  output logic        [LANES-1:0][OW-1:0] dout
);
  import hsi_pkg::*;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [63:0] v;
      v = 64'(signed'(din[l]));
      if (shamt >= 0) v = v >>> shamt;
      else            v = v <<< (-shamt);
      dout[l] = OW'(sat(v, OW));
    end
  end
endmodule
