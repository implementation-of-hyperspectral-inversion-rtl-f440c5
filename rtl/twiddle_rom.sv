// twiddle_rom: the FFT twiddle-factor table.
//
// Holds W_N^k = cos(2*pi*k/N) - j*sin(2*pi*k/N) for k = 0 .. N/2-1 as
// TW-bit signed numbers with TW-2 fraction bits (so +1.0 is representable),
// rounded to nearest. The table is computed while the design is elaborated.
// 'inverse' conjugates the factor for the inverse transform. Read latency is
// one clock, like a block-RAM ROM.
module twiddle_rom #(
  parameter int NFFT  = 256,
  parameter int TW    = 16,
  localparam int HALF = NFFT / 2,
  localparam int KW   = (HALF > 1) ? $clog2(HALF) : 1
) (
  input  logic                 clk,
  input  logic [KW-1:0]        k,
  input  logic                 inverse,
  output logic signed [TW-1:0] w_re,
  output logic signed [TW-1:0] w_im
);
  typedef logic signed [TW-1:0] tab_t [HALF];

  function automatic int rnd(input real v);
    return (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

  function automatic tab_t gen_cos();
    tab_t t;
    for (int i = 0; i < HALF; i++)
      t[i] = TW'(rnd($cos(2.0 * 3.141592653589793 * i / NFFT) * (2.0 ** (TW - 2))));
    return t;
  endfunction

  function automatic tab_t gen_sin();
    tab_t t;
    for (int i = 0; i < HALF; i++)
      t[i] = TW'(rnd($sin(2.0 * 3.141592653589793 * i / NFFT) * (2.0 ** (TW - 2))));
    return t;
  endfunction

  localparam tab_t COS_T = gen_cos();
  localparam tab_t SIN_T = gen_sin();

  always_ff @(posedge clk) begin
    w_re <= COS_T[k];
    w_im <= inverse ? SIN_T[k] : -SIN_T[k];
  end
endmodule
