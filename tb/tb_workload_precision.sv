// tb_workload_precision: reconstruction quality against interferogram
// precision, on the PINV engine at its default size (N = M = 256, K = 6).
//
// A smooth test spectrum x (three Gaussian lines on a slope) is turned into
// an interferogram by an orthonormal cosine transform, y = C x; C is its own
// pseudo-inverse's transpose, so A_dagger = C^T is loaded as the PINV
// matrix (16-bit, 12 fraction bits). The interferogram is then quantised to
// b = 4, 6, ..., 16 bits, left-aligned in the 16-bit sample, and inverted.
// For every b:
//   - the spectrum must match the fixed-point model bit for bit,
//   - the run must take ceil(N/K) * M + 3 clocks,
//   - the SNR of the rescaled spectrum against x is printed; it must grow
//     with b up to 12 bits and be at least 40 dB at 16 bits.
// Precisions above the 16-bit sample width need a wider DW and are not run.
module tb_workload_precision;
  localparam int N = 256, M = 256, K = 6, DW = 16, CW = 16, OW = 24, FRAC = 12;
  localparam int BR = (N + K - 1) / K;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_we = 0, start = 0, busy, done;
  logic [7:0] a_row = '0, a_col = '0, out_idx = '0, y_raddr;
  logic [CW-1:0] a_data = '0;
  logic signed [DW-1:0] y_rdata;
  logic signed [OW-1:0] out_data;
  logic signed [DW-1:0] yq [M];
  always_ff @(posedge clk) y_rdata <= yq[y_raddr];

  pinv_engine dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real gauss(real v, real mu, real sg);
    return $exp(-((v - mu) * (v - mu)) / (2.0 * sg * sg));
  endfunction

  initial begin
    real x [N], y [M], ymax, snr [17];
    logic signed [CW-1:0] aq [N][M];
    repeat (2) @(negedge clk); rst_n = 1;

    // test spectrum and its interferogram
    for (int n = 0; n < N; n++)
      x[n] = 0.2 + 0.3 * real'(n) / N + gauss(n, 60, 6) + 0.6 * gauss(n, 130, 12) + 0.8 * gauss(n, 200, 3);
    ymax = 0.0;
    for (int m = 0; m < M; m++) begin
      y[m] = 0.0;
      for (int n = 0; n < N; n++)
        y[m] += ((n == 0) ? $sqrt(1.0 / N) : $sqrt(2.0 / N)) * $cos(PI * n * (m + 0.5) / N) * x[n];
      if ((y[m] < 0 ? -y[m] : y[m]) > ymax) ymax = (y[m] < 0 ? -y[m] : y[m]);
    end

    // A_dagger = C^T, rounded to CW bits with FRAC fraction bits
    for (int n = 0; n < N; n++)
      for (int m = 0; m < M; m++) begin
        real c;
        c = ((n == 0) ? $sqrt(1.0 / N) : $sqrt(2.0 / N)) * $cos(PI * n * (m + 0.5) / N) * (1 << FRAC);
        aq[n][m] = CW'($rtoi(c + ((c < 0) ? -0.5 : 0.5)));
        a_we = 1; a_row = 8'(n); a_col = 8'(m); a_data = aq[n][m];
        @(negedge clk);
      end
    a_we = 0;

    for (int b = 4; b <= DW; b += 2) begin
      real gain, es, en;
      int t0;
      gain = real'(((1 << (b - 1)) - 1) << (DW - b)) / ymax;
      for (int m = 0; m < M; m++) begin
        real v;
        v = y[m] / ymax * ((1 << (b - 1)) - 1);
        yq[m] = DW'($rtoi(v + ((v < 0) ? -0.5 : 0.5)) <<< (DW - b));
      end
      t0 = cyc;
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 != BR * M + 3) begin failures++; $display("b=%0d latency %0d expected %0d", b, cyc - t0, BR * M + 3); end
      @(negedge clk);
      es = 0.0; en = 0.0;
      for (int n = 0; n < N; n++) begin
        longint s, hi, lo;
        s = 0;
        for (int m = 0; m < M; m++) s += longint'(aq[n][m]) * longint'(yq[m]);
        s = s >>> FRAC;
        hi = (64'sd1 <<< (OW - 1)) - 1; lo = -(64'sd1 <<< (OW - 1));
        s = (s > hi) ? hi : (s < lo) ? lo : s;
        out_idx = 8'(n);
        @(negedge clk);
        checks++;
        if (longint'(out_data) != s) begin failures++; if (failures < 10) $display("b=%0d x[%0d]=%0d expected %0d", b, n, out_data, s); end
        es += x[n] * x[n];
        en += (x[n] - real'(out_data) / gain) * (x[n] - real'(out_data) / gain);
      end
      snr[b] = 10.0 * $log10(es / en);
      $display("interferogram precision %2d bits: SNR %6.2f dB", b, snr[b]);
    end

    for (int b = 6; b <= 12; b += 2) begin
      checks++;
      if (!(snr[b] > snr[b - 2])) begin failures++; $display("SNR did not grow from %0d to %0d bits", b - 2, b); end
    end
    checks++;
    if (!(snr[16] >= 40.0)) begin failures++; $display("SNR at 16 bits only %0f dB", snr[16]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
