// tb_hsi_full: the end-to-end test of tb_hsi_inversion_top run on the core at
// its default size (N = M = R = 256 points, K = 6 memories), with no
// parameter overridden.
//
// Loads the PINV matrix, the SVD factors and several interferograms, then
// runs every method through the one top-level interface and reads each
// spectrum back:
//   FFT  (forward, inverse, a full-scale block that must scale down and a
//         small block that must scale up) against a double-precision DFT,
//         within a few LSBs of the final block exponent;
//   PINV against sat((A y) >>> F);
//   TSVD with full and reduced rank, TIK with several lambdas, against a
//         step-by-step fixed-point model.
// Each mechanism is counted; one that never happened is a failure. Run
// times are checked against the formulas of the engines.
module tb_hsi_full;
  import hsi_pkg::*;
  localparam int N = 256, M = 256, R = 256, K = 6, DW = 16, CW = 16, OW = 24, FRAC = 12, EW = 8;
  localparam int LOGM = $clog2(M);
  localparam int RCW = $clog2((N > R) ? N : R), CCW = $clog2((M > R) ? M : R);
  localparam int XW = (N > M) ? $clog2(N) : $clog2(M);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  method_e method = METH_FFT;
  logic y_we = 0;
  logic [$clog2(M)-1:0] y_idx = '0;
  logic signed [DW-1:0] y_data = '0;
  logic c_we = 0;
  coef_sel_e c_sel = SEL_PINV_A;
  logic [RCW-1:0] c_row = '0;
  logic [CCW-1:0] c_col = '0;
  logic [CW-1:0] c_data = '0, lambda = '0;
  logic start = 0, inverse = 0, busy, done;
  logic [$clog2(R+1)-1:0] r_keep = '0;
  logic [XW-1:0] out_idx = '0;
  logic signed [OW-1:0] out_re, out_im;
  logic signed [EW-1:0] out_exp;

  hsi_inversion_top dut (.*);

  logic signed [CW-1:0] A [N][M], UT [R][M], V [N][R], xi [R];
  logic signed [DW-1:0] y [M];
  int checks = 0, failures = 0;
  int n_fft_fwd = 0, n_fft_inv = 0, n_scale_up = 0, n_scale_down = 0;
  int n_pinv = 0, n_tsvd_full = 0, n_tsvd_trunc = 0, n_tik = 0, n_switch = 0;
  method_e last_method = METH_FFT;

  function automatic longint sat(longint v, int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1; lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  task automatic load(coef_sel_e sel, int row, int col, logic [CW-1:0] d);
    c_we = 1; c_sel = sel; c_row = RCW'(row); c_col = CCW'(col); c_data = d;
    @(negedge clk);
    c_we = 0;
  endtask

  task automatic load_y(int amp);
    for (int m = 0; m < M; m++) begin
      y[m] = DW'($signed($urandom_range(2 * amp, 0)) - amp);
      y_we = 1; y_idx = $bits(y_idx)'(m); y_data = y[m];
      @(negedge clk);
    end
    y_we = 0;
  endtask

  task automatic run(method_e meth, output int cyc);
    if (meth != last_method) n_switch++;
    last_method = meth;
    method = meth;
    start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic check_fft(bit inv);
    int cyc, lat;
    real sc, tol, pi;
    pi = 3.141592653589793;
    inverse = inv;
    run(METH_FFT, cyc);
    lat = LOGM * (M / 2 + 4) + 1;
    checks++;
    if (cyc != lat) begin failures++; $display("FFT latency %0d expected %0d", cyc, lat); end
    if (inv) n_fft_inv++; else n_fft_fwd++;
    if (out_exp < 0) n_scale_up++;
    if (out_exp > 0) n_scale_down++;
    for (int k = 0; k < M; k++) begin
      real rr, ri, ang;
      rr = 0.0; ri = 0.0;
      for (int n = 0; n < M; n++) begin
        ang = 2.0 * pi * ((n * k) % M) / M * (inv ? 1.0 : -1.0);
        rr += $itor(y[n]) * $cos(ang);
        ri += $itor(y[n]) * $sin(ang);
      end
      out_idx = XW'(k);
      @(negedge clk);
      sc = 2.0 ** out_exp;
      tol = sc * 3.0 * LOGM;
      checks++;
      if ($itor(out_re) * sc - rr > tol || rr - $itor(out_re) * sc > tol ||
          $itor(out_im) * sc - ri > tol || ri - $itor(out_im) * sc > tol) begin
        failures++;
        if (failures < 10) $display("FFT k=%0d got (%0f,%0f) expected (%0f,%0f)", k, $itor(out_re) * sc, $itor(out_im) * sc, rr, ri);
      end
    end
  endtask

  task automatic check_pinv();
    int cyc, br;
    run(METH_PINV, cyc);
    br = (N + K - 1) / K;
    checks++;
    if (cyc != br * M + 3) begin failures++; $display("PINV latency %0d expected %0d", cyc, br * M + 3); end
    n_pinv++;
    for (int n = 0; n < N; n++) begin
      longint s;
      s = 0;
      for (int m = 0; m < M; m++) s += longint'(A[n][m]) * longint'(y[m]);
      s = sat(s >>> FRAC, OW);
      out_idx = XW'(n);
      @(negedge clk);
      checks++;
      if (longint'(out_re) != s || out_im != 0 || out_exp != 0) begin
        failures++;
        if (failures < 10) $display("PINV x[%0d]=%0d expected %0d", n, out_re, s);
      end
    end
  endtask

  task automatic check_svd(bit is_tik, int rk, int lam);
    int cyc, nk;
    longint z [R], o2 [R], o1 [N][R];
    r_keep = $bits(r_keep)'(rk);
    lambda = CW'(lam);
    nk = is_tik ? R : rk;
    for (int r = 0; r < nk; r++) begin
      longint x, num, den;
      x = (xi[r] < 0) ? 0 : longint'(xi[r]);
      num = is_tik ? (x << (2 * FRAC)) : (64'sd1 << (2 * FRAC));
      den = is_tik ? x * x + longint'(lam) * longint'(lam) : x;
      z[r] = (den == 0) ? 32767 : num / den;
      if (z[r] > 32767) z[r] = 32767;
      o2[r] = 0;
      for (int m = 0; m < M; m++) o2[r] += longint'(UT[r][m]) * longint'(y[m]);
      o2[r] = sat(o2[r] >>> FRAC, OW);
      for (int n = 0; n < N; n++) o1[n][r] = sat((longint'(V[n][r]) * z[r]) >>> FRAC, CW);
    end
    run(is_tik ? METH_TIK : METH_TSVD, cyc);
    if (is_tik) n_tik++;
    else if (nk < R) n_tsvd_trunc++;
    else n_tsvd_full++;
    $display("%s R'=%0d lambda=%0d: %0d clocks", is_tik ? "TIK " : "TSVD", nk, lam, cyc);
    for (int n = 0; n < N; n++) begin
      longint s;
      s = 0;
      for (int r = 0; r < nk; r++) s += o1[n][r] * o2[r];
      s = sat(s >>> FRAC, OW);
      out_idx = XW'(n);
      @(negedge clk);
      checks++;
      if (longint'(out_re) != s) begin
        failures++;
        if (failures < 10) $display("SVD tik=%0d nk=%0d x[%0d]=%0d expected %0d", is_tik, nk, n, out_re, s);
      end
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // coefficients: values of a few hundredths to a few units in Q(FRAC)
    for (int n = 0; n < N; n++) for (int m = 0; m < M; m++) begin A[n][m] = CW'($signed($urandom_range(4096, 0)) - 2048); load(SEL_PINV_A, n, m, A[n][m]); end
    for (int r = 0; r < R; r++) for (int m = 0; m < M; m++) begin UT[r][m] = CW'($signed($urandom_range(2048, 0)) - 1024); load(SEL_SVD_UT, r, m, UT[r][m]); end
    for (int n = 0; n < N; n++) for (int r = 0; r < R; r++) begin V[n][r] = CW'($signed($urandom_range(2048, 0)) - 1024); load(SEL_SVD_V, n, r, V[n][r]); end
    for (int r = 0; r < R; r++) begin xi[r] = CW'(8192 - (7000 * r) / R); load(SEL_SVD_XI, 0, r, xi[r]); end

    load_y(2000);
    check_pinv();
    check_svd(0, R, 0);
    check_fft(0);
    check_svd(0, R / 3, 0);
    check_svd(1, 0, 2048);
    check_pinv();
    load_y(32000);
    check_fft(0);
    load_y(32000);   // the FFT works in place: reload before the next run
    check_fft(1);
    check_svd(1, 0, 0);
    load_y(9);
    check_fft(0);
    check_pinv();
    check_svd(0, 1, 0);

    checks++; if (n_fft_fwd == 0)    begin failures++; $display("forward FFT never ran"); end
    checks++; if (n_fft_inv == 0)    begin failures++; $display("inverse FFT never ran"); end
    checks++; if (n_scale_up == 0)   begin failures++; $display("BFP never scaled a block up"); end
    checks++; if (n_scale_down == 0) begin failures++; $display("BFP never scaled a block down"); end
    checks++; if (n_pinv == 0)       begin failures++; $display("PINV never ran"); end
    checks++; if (n_tsvd_full == 0)  begin failures++; $display("full-rank TSVD never ran"); end
    checks++; if (n_tsvd_trunc == 0) begin failures++; $display("truncated TSVD never ran"); end
    checks++; if (n_tik == 0)        begin failures++; $display("TIK never ran"); end
    checks++; if (n_switch < 3)      begin failures++; $display("method switched only %0d times", n_switch); end
    $display("fft fwd=%0d inv=%0d up=%0d down=%0d pinv=%0d tsvd full=%0d trunc=%0d tik=%0d switches=%0d",
             n_fft_fwd, n_fft_inv, n_scale_up, n_scale_down, n_pinv, n_tsvd_full, n_tsvd_trunc, n_tik, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
