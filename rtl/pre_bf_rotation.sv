// pre_bf_rotation: routes the words read from the R memory banks to the
// butterfly inputs.
//
// Because the conflict-free bank mapping puts operand i of a butterfly in a
// bank that depends on the butterfly's address, the bank outputs must be
// rotated before the butterfly: dout[i] = din[(i + rot) mod R]. The rotation
// amount comes from the address generator, which derives it from the stage
// and butterfly index. Purely combinational.
module pre_bf_rotation #(
  parameter int R   = 2,
  parameter int W   = 32,
  localparam int RW = (R > 1) ? $clog2(R) : 1
) (
  input  logic [RW-1:0]       rot,
  input  logic [R-1:0][W-1:0] din,
  output logic [R-1:0][W-1:0] dout
);
  always_comb begin
    for (int i = 0; i < R; i++) dout[i] = din[(i + int'(rot)) % R];
  end
endmodule
