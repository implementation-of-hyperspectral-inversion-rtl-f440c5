// fft_agu: address generator of the radix-2 memory-based FFT.
//
// For stage s (0 .. log2(N)-1) and butterfly j (0 .. N/2-1) of an in-place
// decimation-in-time FFT whose input was stored in bit-reversed order, the
// operands are points a = j with a zero inserted at bit s, and b = a + 2^s;
// the twiddle is W_N^((j mod 2^s) << (log2(N)-1-s)). Point p lives in bank
// parity(p) at offset p >> 1; a and b differ in one bit, so they always sit
// in different banks. 'rot' is the bank of operand a, which the pre- and
// post-butterfly rotations use. Purely combinational.
module fft_agu #(
  parameter int NFFT  = 256,
  localparam int LOGN = $clog2(NFFT),
  localparam int BAW  = (LOGN > 1) ? LOGN - 1 : 1,
  localparam int SBW  = (LOGN > 1) ? $clog2(LOGN) : 1
) (
  input  logic [SBW-1:0]         stage,
  input  logic [BAW-1:0]         bf,
  output logic [LOGN-1:0]        idx_a,
  output logic [LOGN-1:0]        idx_b,
  output logic [1:0][BAW-1:0]    raddr,
  output logic                   rot,
  output logic [BAW-1:0]         tw_k
);
  always_comb begin
    logic [LOGN-1:0] lowmask, j;
    j       = LOGN'(bf);
    lowmask = LOGN'((1 << stage) - 1);
    idx_a   = ((j & ~lowmask) << 1) | (j & lowmask);
    idx_b   = idx_a | LOGN'(1 << stage);
    rot     = ^idx_a;
    raddr[rot]  = BAW'(idx_a >> 1);
    raddr[!rot] = BAW'(idx_b >> 1);
    tw_k    = BAW'((j & lowmask) << (LOGN - 1 - int'(stage)));
  end
endmodule
