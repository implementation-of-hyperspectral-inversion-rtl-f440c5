// tb_fft_agu: for every stage and butterfly of a 64-point FFT, checks the
// operand indices against the textbook DIT loop (groups of 2^(s+1), pairs
// 2^s apart), that the two operands fall in different banks, that each
// bank offset is index >> 1 in the bank named by 'rot', and that every
// point is touched exactly once per stage. Also checks the twiddle index.
module tb_fft_agu;
  localparam int NFFT = 64, LOGN = 6;
  logic [2:0] stage;
  logic [LOGN-2:0] bf;
  logic [LOGN-1:0] idx_a, idx_b;
  logic [1:0][LOGN-2:0] raddr;
  logic rot;
  logic [LOGN-2:0] tw_k;
  fft_agu #(.NFFT(NFFT)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s < LOGN; s++) begin
      bit seen [NFFT];
      int j, h;
      h = 1 << s;
      for (int i = 0; i < NFFT; i++) seen[i] = 0;
      j = 0;
      for (int g = 0; g < NFFT; g += 2 * h)
        for (int q = 0; q < h; q++) begin
          stage = 3'(s); bf = (LOGN-1)'(j); #1;
          checks++;
          if (idx_a != LOGN'(g + q) || idx_b != LOGN'(g + q + h)) begin
            failures++; $display("s=%0d j=%0d a=%0d b=%0d", s, j, idx_a, idx_b);
          end
          checks++;
          if ((^idx_a) == (^idx_b)) begin failures++; $display("bank conflict s=%0d j=%0d", s, j); end
          checks++;
          if (rot != ^idx_a || raddr[rot] != (LOGN-1)'(idx_a >> 1) || raddr[!rot] != (LOGN-1)'(idx_b >> 1)) begin
            failures++; $display("offsets s=%0d j=%0d", s, j);
          end
          checks++;
          if (int'(tw_k) != q * (NFFT / (2 * h))) begin failures++; $display("tw s=%0d j=%0d k=%0d", s, j, tw_k); end
          seen[idx_a] = 1; seen[idx_b] = 1;
          j++;
        end
      for (int i = 0; i < NFFT; i++) begin checks++; if (!seen[i]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
