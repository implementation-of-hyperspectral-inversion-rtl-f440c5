// tb_pinv_engine: loads a random 14 x 9 pseudo-inverse into K = 4 banks
// (the last bank is short), runs it on random interferograms and reads
// the spectrum back. Every x[n] must equal sat((sum_m a[n][m] y[m]) >>> FRAC)
// and start-to-done must take ceil(N/K) * M + 3 clocks.
module tb_pinv_engine;
  localparam int N = 14, M = 9, K = 4, DW = 16, CW = 16, OW = 24, FRAC = 10;
  localparam int BR = (N + K - 1) / K;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_we = 0;
  logic [$clog2(N)-1:0] a_row = '0, out_idx = '0;
  logic [$clog2(M)-1:0] a_col = '0, y_raddr;
  logic [CW-1:0] a_data = '0;
  logic start = 0, busy, done;
  logic signed [DW-1:0] y_rdata;
  logic signed [OW-1:0] out_data;
  pinv_engine #(.N(N), .M(M), .K(K), .DW(DW), .CW(CW), .OW(OW), .FRAC(FRAC)) dut (.*);

  logic signed [CW-1:0] A [N][M];
  logic signed [DW-1:0] y [M];
  always_ff @(posedge clk) y_rdata <= y[y_raddr];

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < N; n++)
      for (int m = 0; m < M; m++) begin
        A[n][m] = CW'($urandom);
        a_we = 1; a_row = $bits(a_row)'(n); a_col = $bits(a_col)'(m); a_data = A[n][m];
        @(negedge clk);
      end
    a_we = 0;
    for (int trial = 0; trial < 4; trial++) begin
      int cyc;
      for (int m = 0; m < M; m++) y[m] = DW'($urandom);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != BR * M + 3) begin failures++; $display("latency %0d expected %0d", cyc, BR * M + 3); end
      for (int n = 0; n < N; n++) begin
        longint s;
        s = 0;
        for (int m = 0; m < M; m++) s += longint'(A[n][m]) * longint'(y[m]);
        s = s >>> FRAC;
        if (s > (1 <<< (OW - 1)) - 1) s = (1 <<< (OW - 1)) - 1;
        if (s < -(1 <<< (OW - 1))) s = -(1 <<< (OW - 1));
        out_idx = $bits(out_idx)'(n);
        @(negedge clk);
        checks++;
        if (longint'(out_data) != s) begin failures++; $display("x[%0d]=%0d expected %0d", n, out_data, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
