// post_bf_rotation: routes the butterfly results back to the memory banks.
//
// It undoes pre_bf_rotation with the same rotation amount, so result i goes
// to the bank operand i was read from and the FFT is computed in place:
// dout[(i + rot) mod R] = din[i]. Purely combinational.
module post_bf_rotation #(
  parameter int R   = 2,
  parameter int W   = 32,
  localparam int RW = (R > 1) ? $clog2(R) : 1
) (
  input  logic [RW-1:0]       rot,
  input  logic [R-1:0][W-1:0] din,
  output logic [R-1:0][W-1:0] dout
);
  always_comb begin
    for (int i = 0; i < R; i++) dout[(i + int'(rot)) % R] = din[i];
  end
endmodule
