// tb_workload_k_sweep: the parallel-memory sweep, K = 1 .. 6 banks, for the
// PINV engine and the TSVD/TIK engine at the default problem size
// (N = M = R = 256).
//
// Twelve engines (six of each kind) are loaded with the same random
// matrices through one shared load bus and started together on the same
// interferogram: the TSVD engines in the worst case, with every singular
// value kept. K changes only how the rows are spread over the banks, so
// every engine of a kind must return the same spectrum, and that spectrum
// must match the fixed-point model computed here. Each run time must match
// its formula:
//   PINV  ceil(N/K) * M + 3
//   TSVD  max(ceil(R/K) * M + 3, P + 1 + ceil(N/K) * R + 2)
//         + ceil(N/K) * R + 5,  P = R * (CW + 2) + 1 (penalizer),
// as U^T y runs beside the penalizer and V diag(zeta).
// The measured clocks are printed for comparison with the latencies
// reported for the HLS designs this core is modelled on.
module tb_workload_k_sweep;
  import hsi_pkg::*;
  localparam int N = 256, M = 256, R = 256, DW = 16, CW = 16, OW = 24, FRAC = 12, KMAX = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic c_we = 0;
  coef_sel_e c_sel = SEL_PINV_A;
  logic [7:0] c_row = '0, c_col = '0;
  logic [CW-1:0] c_data = '0;
  logic start = 0;
  logic [7:0] out_idx = '0;
  logic signed [DW-1:0] y [M];

  logic [KMAX:1] p_done, s_done;
  logic signed [OW-1:0] p_x [KMAX+1], s_x [KMAX+1];

  for (genvar k = 1; k <= KMAX; k++) begin : g_k
    logic [7:0] p_ya, s_ya;
    logic signed [DW-1:0] p_yd, s_yd;
    always_ff @(posedge clk) begin p_yd <= y[p_ya]; s_yd <= y[s_ya]; end

    pinv_engine #(.N(N), .M(M), .K(k), .DW(DW), .CW(CW), .OW(OW), .FRAC(FRAC)) u_p (
      .clk(clk), .rst_n(rst_n), .a_we(c_we && c_sel == SEL_PINV_A), .a_row(c_row), .a_col(c_col), .a_data(c_data),
      .start(start), .y_raddr(p_ya), .y_rdata(p_yd), .out_idx(out_idx), .out_data(p_x[k]), .busy(), .done(p_done[k])
    );
    svd_engine #(.N(N), .M(M), .R(R), .K(k), .DW(DW), .CW(CW), .OW(OW), .FRAC(FRAC)) u_s (
      .clk(clk), .rst_n(rst_n), .c_we(c_we && c_sel != SEL_PINV_A), .c_sel(c_sel), .c_row(c_row), .c_col(c_col), .c_data(c_data),
      .start(start), .tik(1'b0), .r_keep(9'(R)), .lambda('0),
      .y_raddr(s_ya), .y_rdata(s_yd), .out_idx(out_idx), .out_data(s_x[k]), .busy(), .done(s_done[k])
    );
  end

  logic signed [CW-1:0] A [N][M], UT [R][M], V [N][R], xi [R];
  int checks = 0, failures = 0;
  int p_lat [KMAX+1], s_lat [KMAX+1];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint sat(longint v, int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1; lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  task automatic load(coef_sel_e sel, int row, int col, logic [CW-1:0] d);
    c_we = 1; c_sel = sel; c_row = 8'(row); c_col = 8'(col); c_data = d;
    @(negedge clk);
    c_we = 0;
  endtask

  // record when each engine finishes
  int t0;
  always @(negedge clk) for (int k = 1; k <= KMAX; k++) begin
    if (p_done[k]) p_lat[k] = cyc - t0;
    if (s_done[k]) s_lat[k] = cyc - t0;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint z [R], o2 [R], xp [N], xs [N];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < N; n++) for (int m = 0; m < M; m++) begin A[n][m] = CW'($signed($urandom_range(512, 0)) - 256); load(SEL_PINV_A, n, m, A[n][m]); end
    for (int r = 0; r < R; r++) for (int m = 0; m < M; m++) begin UT[r][m] = CW'($signed($urandom_range(512, 0)) - 256); load(SEL_SVD_UT, r, m, UT[r][m]); end
    for (int n = 0; n < N; n++) for (int r = 0; r < R; r++) begin V[n][r] = CW'($signed($urandom_range(512, 0)) - 256); load(SEL_SVD_V, n, r, V[n][r]); end
    for (int r = 0; r < R; r++) begin xi[r] = CW'(16000 - 60 * r); load(SEL_SVD_XI, 0, r, xi[r]); end
    for (int m = 0; m < M; m++) y[m] = DW'($signed($urandom_range(8000, 0)) - 4000);

    // fixed-point model
    for (int r = 0; r < R; r++) begin
      z[r] = (64'sd1 << (2 * FRAC)) / longint'(xi[r]);
      if (z[r] > 32767) z[r] = 32767;
      o2[r] = 0;
      for (int m = 0; m < M; m++) o2[r] += longint'(UT[r][m]) * longint'(y[m]);
      o2[r] = sat(o2[r] >>> FRAC, OW);
    end
    for (int n = 0; n < N; n++) begin
      xp[n] = 0;
      for (int m = 0; m < M; m++) xp[n] += longint'(A[n][m]) * longint'(y[m]);
      xp[n] = sat(xp[n] >>> FRAC, OW);
      xs[n] = 0;
      for (int r = 0; r < R; r++) xs[n] += sat((longint'(V[n][r]) * z[r]) >>> FRAC, CW) * o2[r];
      xs[n] = sat(xs[n] >>> FRAC, OW);
    end

    @(negedge clk);
    t0 = cyc;
    start = 1; @(negedge clk); start = 0;
    while (s_done != '1 || p_done != '1) begin
      logic [KMAX:1] pd, sd;
      pd = '0; sd = '0;
      for (int k = 1; k <= KMAX; k++) begin pd[k] = (p_lat[k] != 0); sd[k] = (s_lat[k] != 0); end
      if (pd == '1 && sd == '1) break;
      @(negedge clk);
    end
    @(negedge clk);

    for (int k = 1; k <= KMAX; k++) begin
      int brn, bru, pe, se, pen;
      brn = (N + k - 1) / k; bru = (R + k - 1) / k;
      pe = brn * M + 3;
      pen = R * (CW + 2) + 1;
      se = ((bru * M + 3 > pen + 1 + brn * R + 2) ? bru * M + 3 : pen + 1 + brn * R + 2) + (brn * R + 3) + 2;
      $display("K=%0d  PINV %0d clocks (formula %0d)   TSVD full rank %0d clocks (formula %0d)", k, p_lat[k], pe, s_lat[k], se);
      checks++; if (p_lat[k] != pe) begin failures++; $display("PINV K=%0d latency mismatch", k); end
      checks++; if (s_lat[k] != se) begin failures++; $display("TSVD K=%0d latency mismatch", k); end
    end

    for (int n = 0; n < N; n++) begin
      out_idx = 8'(n);
      @(negedge clk);
      for (int k = 1; k <= KMAX; k++) begin
        checks += 2;
        if (longint'(p_x[k]) != xp[n]) begin failures++; if (failures < 10) $display("PINV K=%0d x[%0d]=%0d expected %0d", k, n, p_x[k], xp[n]); end
        if (longint'(s_x[k]) != xs[n]) begin failures++; if (failures < 10) $display("TSVD K=%0d x[%0d]=%0d expected %0d", k, n, s_x[k], xs[n]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
