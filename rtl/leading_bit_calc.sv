// leading_bit_calc: finds the leading-bit position of the largest word of a
// block.
//
// Every valid cycle the one's-complement magnitudes of the LANES input words
// (x for x >= 0, ~x for x < 0) are OR-ed into an accumulator; the highest
// set bit of that OR is the highest set bit of the largest magnitude, so no
// comparator tree is needed. 'nbits' is the number of magnitude bits (index
// of the leading one plus one, 0 for an all-zero block) and is read from the
// register, so it covers every word presented up to the previous clock.
// 'clr' starts a new block; if 'valid' is high in the same cycle the new
// words become the first of that block.
module leading_bit_calc #(
  parameter int LANES = 4,
  parameter int W     = 16,
  localparam int NBW  = $clog2(W + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       valid,
  input  logic [LANES-1:0][W-1:0]    din,
  output logic [NBW-1:0]             nbits
);
  logic [W-2:0] acc, mag_or;

  always_comb begin
    mag_or = '0;
    for (int l = 0; l < LANES; l++)
      mag_or |= din[l][W-1] ? ~din[l][W-2:0] : din[l][W-2:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clr)   acc <= valid ? mag_or : '0;
    else if (valid) acc <= acc | mag_or;
  end

  always_comb begin
    nbits = '0;
    for (int b = 0; b < W - 1; b++)
      if (acc[b]) nbits = NBW'(b + 1);
  end
endmodule
