// hsi_inversion_top: hyperspectral spectrum reconstruction from Fourier-
// transform-spectrometer interferograms, with four selectable inversions.
//
// One interferogram y of M samples is loaded per pixel; 'method' chooses
// how the spectrum x of N values is recovered from it:
//   METH_FFT   block-floating-point radix-2 FFT of y (bfp_fft), the result
//              given as mantissa and a shared exponent;
//   METH_PINV  x = A_dagger y with K parallel memories (pinv_engine);
//   METH_TSVD  x = V Xi' U^T y keeping r_keep singular values (svd_engine);
//   METH_TIK   the same with Tikhonov weights xi/(xi^2+lambda^2).
// The matrix methods share one interferogram buffer; the FFT keeps y in its
// own two-bank memory (real part = y, imaginary part = 0). Coefficients of
// the matrix methods are loaded through c_* with c_sel naming the memory.
//
// Interface: y_we/y_idx/y_data load the interferogram; c_* load
// coefficients; 'start' runs the selected method ('inverse' applies to the
// FFT, 'r_keep' to TSVD, 'lambda' to TIK); 'done' pulses at the end; then
// out_re/out_im/out_exp show spectrum point out_idx one clock after
// out_idx (out_im and out_exp are zero for the matrix methods). Keep
// 'method' steady from start until the spectrum has been read.
//
// The FFT length is M, which must be a power of two. Gathering the engines
// behind one method select is this implementation's choice; each engine
// can also be used on its own.
module hsi_inversion_top #(
  parameter int N    = 256,
  parameter int M    = 256,
  parameter int R    = 256,
  parameter int K    = 6,
  parameter int DW   = 16,
  parameter int CW   = 16,
  parameter int OW   = 24,
  parameter int FRAC = 12,
  parameter int EW   = 8,
  localparam int RCW = $clog2(((N > R) ? N : R)),
  localparam int CCW = $clog2(((M > R) ? M : R)),
  localparam int NW  = (N > 1) ? $clog2(N) : 1,
  localparam int MW  = (M > 1) ? $clog2(M) : 1,
  localparam int RNW = $clog2(R + 1),
  localparam int XW  = (N > M) ? NW : MW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  hsi_pkg::method_e     method,
  // interferogram load
  input  logic                 y_we,
  input  logic [MW-1:0]        y_idx,
  input  logic signed [DW-1:0] y_data,
  // coefficient load
  input  logic                 c_we,
  input  hsi_pkg::coef_sel_e   c_sel,
  input  logic [RCW-1:0]       c_row,
  input  logic [CCW-1:0]       c_col,
  input  logic [CW-1:0]        c_data,
  // run control
  input  logic                 start,
  input  logic                 inverse,
  input  logic [RNW-1:0]       r_keep,
  input  logic [CW-1:0]        lambda,
  output logic                 busy,
  output logic                 done,
  // spectrum read
  input  logic [XW-1:0]        out_idx,
  output logic signed [OW-1:0] out_re,
  output logic signed [OW-1:0] out_im,
  output logic signed [EW-1:0] out_exp
);
  import hsi_pkg::*;

  if ((1 << $clog2(M)) != M) begin : g_bad_m
    $error("hsi_inversion_top: M must be a power of two for the FFT engine");
  end

  // ---------------- shared interferogram buffer ----------------
  logic [MW-1:0]        y_raddr, pinv_y_raddr, svd_y_raddr;
  logic signed [DW-1:0] y_rdata;

  sdp_ram #(.DEPTH(M), .W(DW)) u_ybuf (
    .clk(clk), .we(y_we), .waddr(y_idx), .wdata(y_data),
    .raddr(y_raddr), .rdata(y_rdata)
  );
  assign y_raddr = (method == METH_PINV) ? pinv_y_raddr : svd_y_raddr;

  // ---------------- FFT ----------------
  logic                 fft_busy, fft_done;
  logic signed [DW-1:0] fft_re, fft_im;
  logic signed [EW-1:0] fft_exp;

  bfp_fft #(.NFFT(M), .DW(DW), .EW(EW)) u_fft (
    .clk(clk), .rst_n(rst_n),
    .in_we(y_we), .in_idx(y_idx), .in_re(y_data), .in_im('0),
    .start(start && method == METH_FFT), .inverse(inverse),
    .busy(fft_busy), .done(fft_done),
    .out_idx(MW'(out_idx)), .out_re(fft_re), .out_im(fft_im), .exponent(fft_exp)
  );

  // ---------------- PINV ----------------
  logic                 pinv_busy, pinv_done;
  logic signed [OW-1:0] pinv_x;

  pinv_engine #(.N(N), .M(M), .K(K), .DW(DW), .CW(CW), .OW(OW), .FRAC(FRAC)) u_pinv (
    .clk(clk), .rst_n(rst_n),
    .a_we(c_we && c_sel == SEL_PINV_A), .a_row(NW'(c_row)), .a_col(MW'(c_col)), .a_data(c_data),
    .start(start && method == METH_PINV),
    .y_raddr(pinv_y_raddr), .y_rdata(y_rdata),
    .out_idx(NW'(out_idx)), .out_data(pinv_x), .busy(pinv_busy), .done(pinv_done)
  );

  // ---------------- TSVD / TIK ----------------
  logic                 svd_busy, svd_done;
  logic signed [OW-1:0] svd_x;

  svd_engine #(.N(N), .M(M), .R(R), .K(K), .DW(DW), .CW(CW), .OW(OW), .FRAC(FRAC)) u_svd (
    .clk(clk), .rst_n(rst_n),
    .c_we(c_we && c_sel != SEL_PINV_A), .c_sel(c_sel), .c_row(c_row), .c_col(c_col), .c_data(c_data),
    .start(start && (method == METH_TSVD || method == METH_TIK)),
    .tik(method == METH_TIK), .r_keep(r_keep), .lambda(lambda),
    .y_raddr(svd_y_raddr), .y_rdata(y_rdata),
    .out_idx(NW'(out_idx)), .out_data(svd_x), .busy(svd_busy), .done(svd_done)
  );

  // ---------------- status and spectrum read ----------------
  assign busy = fft_busy || pinv_busy || svd_busy;
  assign done = fft_done || pinv_done || svd_done;

  always_comb begin
    out_im  = '0;
    out_exp = '0;
    unique case (method)
      METH_FFT: begin
        out_re  = OW'(fft_re);
        out_im  = OW'(fft_im);
        out_exp = fft_exp;
      end
      METH_PINV: out_re = pinv_x;
      default:   out_re = svd_x;
    endcase
  end

  always_ff @(posedge clk)
    if (rst_n) a_one_engine: assert (!(start && busy)) else $error("hsi_inversion_top: start while busy");
endmodule
