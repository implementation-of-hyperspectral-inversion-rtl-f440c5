// tb_twiddle_rom: every entry of a 64-point table, forward and inverse,
// must be within one LSB of cos(2 pi k/N) and -/+ sin(2 pi k/N) scaled by
// 2^(TW-2), one clock after the index.
module tb_twiddle_rom;
  localparam int NFFT = 64, TW = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [$clog2(NFFT/2)-1:0] k = '0;
  logic inverse = 0;
  logic signed [TW-1:0] w_re, w_im;
  twiddle_rom #(.NFFT(NFFT), .TW(TW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int inv = 0; inv < 2; inv++)
      for (int i = 0; i < NFFT / 2; i++) begin
        real c, s, sc;
        sc = 2.0 ** (TW - 2);
        @(negedge clk); k = i[$bits(k)-1:0]; inverse = inv[0];
        @(negedge clk);
        c = $cos(2.0 * 3.141592653589793 * i / NFFT) * sc;
        s = $sin(2.0 * 3.141592653589793 * i / NFFT) * sc * (inv ? 1.0 : -1.0);
        checks += 2;
        if ($itor(w_re) - c > 1.0 || c - $itor(w_re) > 1.0) begin failures++; $display("cos k=%0d %0d vs %f", i, w_re, c); end
        if ($itor(w_im) - s > 1.0 || s - $itor(w_im) > 1.0) begin failures++; $display("sin k=%0d %0d vs %f", i, w_im, s); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
