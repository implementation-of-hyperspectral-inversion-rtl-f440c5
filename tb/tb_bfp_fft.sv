// tb_bfp_fft: checks the BFP FFT engine against a double-precision DFT.
//
// Several blocks of random complex samples (full-scale, small and a single
// tone) are transformed forward and inverse. Each result point, rescaled by
// 2^exponent, must lie within a few final LSBs of the exact DFT. The start
// to done time must equal log2(N)*(N/2+4)+1 clocks. A small-amplitude block
// must be normalised up (negative exponent), a full-scale one down.
module tb_bfp_fft;
  localparam int NFFT = 256;
  localparam int DW   = 16;
  localparam int LOGN = $clog2(NFFT);
  localparam int LAT  = LOGN * (NFFT / 2 + 4) + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_we = 0, start = 0, inverse = 0, busy, done;
  logic [LOGN-1:0] in_idx = '0, out_idx = '0;
  logic signed [DW-1:0] in_re = '0, in_im = '0, out_re, out_im;
  logic signed [7:0] exponent;

  bfp_fft #(.NFFT(NFFT), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  real xr [NFFT], xi [NFFT];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int kind, input bit inv, input int amp);
    int cyc;
    real maxerr, tol, sc, er, ei, pi;
    pi = 3.141592653589793;
    for (int i = 0; i < NFFT; i++) begin
      case (kind)
        0: begin xr[i] = $itor($signed($urandom_range(2*amp, 0)) - amp);
                  xi[i] = $itor($signed($urandom_range(2*amp, 0)) - amp); end
        default: begin xr[i] = $rtoi(amp * $cos(2.0*pi*5*i/NFFT)); xi[i] = 0.0; end
      endcase
    end
    @(negedge clk);
    for (int i = 0; i < NFFT; i++) begin
      in_we = 1; in_idx = LOGN'(i); in_re = DW'($rtoi(xr[i])); in_im = DW'($rtoi(xi[i]));
      @(negedge clk);
    end
    in_we = 0; inverse = inv; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != LAT) begin failures++; $display("latency %0d expected %0d", cyc, LAT); end
    sc = 2.0 ** exponent;
    tol = sc * 2.0 * LOGN;
    maxerr = 0.0;
    for (int k = 0; k < NFFT; k++) begin
      real rr = 0.0, ri = 0.0, ang;
      for (int n = 0; n < NFFT; n++) begin
        ang = 2.0 * pi * ((n * k) % NFFT) / NFFT * (inv ? 1.0 : -1.0);
        rr += xr[n] * $cos(ang) - xi[n] * $sin(ang);
        ri += xr[n] * $sin(ang) + xi[n] * $cos(ang);
      end
      out_idx = LOGN'(k);
      @(negedge clk);
      er = $itor(out_re) * sc - rr;
      ei = $itor(out_im) * sc - ri;
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > maxerr) maxerr = er;
      if (ei > maxerr) maxerr = ei;
      checks++;
      if (er > tol || ei > tol) begin
        failures++;
        if (failures < 10) $display("k=%0d rtl=(%0f,%0f) ref=(%0f,%0f) exp=%0d", k,
                                    $itor(out_re)*sc, $itor(out_im)*sc, rr, ri, exponent);
      end
    end
    $display("kind=%0d inv=%0d amp=%0d exponent=%0d maxerr=%0f tol=%0f", kind, inv, amp, exponent, maxerr, tol);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 0, 32767);
    checks++; if (exponent <= 0) begin failures++; $display("full-scale block not scaled down"); end
    run(0, 0, 20);
    checks++; if (exponent >= 0) begin failures++; $display("small block not scaled up"); end
    run(1, 0, 30000);
    run(0, 1, 10000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
