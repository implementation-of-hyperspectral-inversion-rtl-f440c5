// tb_fft_butterfly: streams random operands and twiddles, one per clock;
// each result, two clocks later, must equal a +/- (w*b >>> (TW-2)) computed
// here with 64-bit integers, and in_valid must reappear as out_valid
// exactly two clocks later.
module tb_fft_butterfly;
  localparam int DW = 16, TW = 16, OW = DW + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [DW-1:0] a_re = 0, a_im = 0, b_re = 0, b_im = 0;
  logic signed [TW-1:0] w_re = 0, w_im = 0;
  logic out_valid;
  logic signed [OW-1:0] x_re, x_im, y_re, y_im;
  fft_butterfly #(.DW(DW), .TW(TW)) dut (.*);
  int checks = 0, failures = 0;
  longint exp_q [$];
  bit     vq [$];

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      longint tr, ti;
      real ang;
      in_valid = (t < 598) ? 1'($urandom) : 1'b0;
      a_re = DW'($urandom); a_im = DW'($urandom); b_re = DW'($urandom); b_im = DW'($urandom);
      ang = $itor($urandom_range(1000, 0)) / 1000.0 * 3.14159;
      w_re = TW'($rtoi($cos(ang) * 16384.0)); w_im = TW'($rtoi(-$sin(ang) * 16384.0));
      tr = (longint'(b_re) * w_re - longint'(b_im) * w_im) >>> (TW - 2);
      ti = (longint'(b_re) * w_im + longint'(b_im) * w_re) >>> (TW - 2);
      exp_q.push_back(a_re + tr); exp_q.push_back(a_im + ti);
      exp_q.push_back(a_re - tr); exp_q.push_back(a_im - ti);
      vq.push_back(in_valid);
      @(negedge clk);
      if (t >= 1) begin
        bit v;
        longint e0, e1, e2, e3;
        v = vq.pop_front();
        e0 = exp_q.pop_front(); e1 = exp_q.pop_front(); e2 = exp_q.pop_front(); e3 = exp_q.pop_front();
        checks++;
        if (out_valid !== v) begin failures++; $display("valid mismatch t=%0d", t); end
        checks++;
        if (x_re != e0 || x_im != e1 || y_re != e2 || y_im != e3) begin
          failures++;
          if (failures < 5) $display("t=%0d got %0d %0d %0d %0d exp %0d %0d %0d %0d", t, x_re, x_im, y_re, y_im, e0, e1, e2, e3);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
