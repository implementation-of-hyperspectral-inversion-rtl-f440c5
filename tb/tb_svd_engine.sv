// tb_svd_engine: loads random U^T (R x M), V (N x R) and singular values
// into an engine with N = 11, M = 8, R = 7, K = 3, then runs TSVD with
// several ranks R' and TIK with several lambdas. The expected spectrum is
// computed here step by step with the same fixed-point rules (zeta by
// integer division, O2 = sat(U^T y >>> F), O1 = sat(V zeta >>> F),
// x = sat(O1 O2 >>> F)) and must match exactly. The run time must grow with
// R' (a smaller rank is faster).
module tb_svd_engine;
  import hsi_pkg::*;
  localparam int N = 11, M = 8, R = 7, K = 3, DW = 16, CW = 16, OW = 24, FRAC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic c_we = 0;
  coef_sel_e c_sel = SEL_SVD_UT;
  logic [$clog2(N)-1:0] c_row = '0, out_idx = '0;
  logic [$clog2(M)-1:0] c_col = '0, y_raddr;
  logic [CW-1:0] c_data = '0, lambda = '0;
  logic start = 0, tik = 0, busy, done;
  logic [$clog2(R+1)-1:0] r_keep = '0;
  logic signed [DW-1:0] y_rdata;
  logic signed [OW-1:0] out_data;
  svd_engine #(.N(N), .M(M), .R(R), .K(K), .DW(DW), .CW(CW), .OW(OW), .FRAC(FRAC)) dut (.*);

  logic signed [CW-1:0] UT [R][M], V [N][R], xi [R];
  logic signed [DW-1:0] y [M];
  always_ff @(posedge clk) y_rdata <= y[y_raddr];

  function automatic longint sat(longint v, int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1; lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  task automatic load(coef_sel_e sel, int row, int col, logic [CW-1:0] d);
    c_we = 1; c_sel = sel; c_row = $bits(c_row)'(row); c_col = $bits(c_col)'(col); c_data = d;
    @(negedge clk);
    c_we = 0;
  endtask

  int checks = 0, failures = 0;
  int lat_by_rank [int];
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) for (int m = 0; m < M; m++) begin UT[r][m] = CW'($signed($urandom_range(512, 0)) - 256); load(SEL_SVD_UT, r, m, UT[r][m]); end
    for (int n = 0; n < N; n++) for (int r = 0; r < R; r++) begin V[n][r] = CW'($signed($urandom_range(512, 0)) - 256); load(SEL_SVD_V, n, r, V[n][r]); end
    for (int r = 0; r < R; r++) begin xi[r] = CW'(2000 - 250 * r); load(SEL_SVD_XI, 0, r, xi[r]); end
    for (int trial = 0; trial < 8; trial++) begin
      int cyc, nk;
      longint z [R], o2 [R], o1 [N][R];
      for (int m = 0; m < M; m++) y[m] = DW'($signed($urandom_range(4000, 0)) - 2000);
      tik = (trial >= 4);
      r_keep = tik ? '0 : $bits(r_keep)'(trial == 0 ? R : (trial == 1 ? 1 : $urandom_range(R, 1)));
      lambda = CW'(100 * trial);
      nk = tik ? R : int'(r_keep);
      for (int r = 0; r < nk; r++) begin
        longint x, num, den;
        x = longint'(xi[r]);
        num = tik ? (x << (2 * FRAC)) : (64'sd1 << (2 * FRAC));
        den = tik ? x * x + longint'(lambda) * longint'(lambda) : x;
        z[r] = (den == 0) ? 32767 : num / den;
        if (z[r] > 32767) z[r] = 32767;
        o2[r] = 0;
        for (int m = 0; m < M; m++) o2[r] += longint'(UT[r][m]) * longint'(y[m]);
        o2[r] = sat(o2[r] >>> FRAC, OW);
        for (int n = 0; n < N; n++) o1[n][r] = sat((longint'(V[n][r]) * z[r]) >>> FRAC, CW);
      end
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (!tik) lat_by_rank[nk] = cyc;
      for (int n = 0; n < N; n++) begin
        longint s;
        s = 0;
        for (int r = 0; r < nk; r++) s += o1[n][r] * o2[r];
        s = sat(s >>> FRAC, OW);
        out_idx = $bits(out_idx)'(n);
        @(negedge clk);
        checks++;
        if (longint'(out_data) != s) begin
          failures++;
          if (failures < 10) $display("tik=%0d nk=%0d x[%0d]=%0d expected %0d", tik, nk, n, out_data, s);
        end
      end
      $display("tik=%0d R'=%0d lambda=%0d: %0d clocks", tik, nk, lambda, cyc);
    end
    checks++;
    if (lat_by_rank.exists(1) && lat_by_rank.exists(R) && !(lat_by_rank[1] < lat_by_rank[R])) begin
      failures++; $display("truncation does not shorten the run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
