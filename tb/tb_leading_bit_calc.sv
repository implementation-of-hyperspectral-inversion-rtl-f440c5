// tb_leading_bit_calc: blocks of random signed words; after each block
// nbits must equal the bit length of the largest one's-complement
// magnitude seen since the last clear (worked out here by comparison, not
// by OR-ing). Also checks all-zero blocks and clear-with-valid.
module tb_leading_bit_calc;
  localparam int LANES = 4, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, valid = 0;
  logic [LANES-1:0][W-1:0] din = '0;
  logic [$clog2(W+1)-1:0] nbits;
  leading_bit_calc #(.LANES(LANES), .W(W)) dut (.*);
  int checks = 0, failures = 0;

  function automatic int blen(int x);
    int m, n;
    m = (x < 0) ? -x - 1 : x;
    n = 0;
    while (m > 0) begin n++; m = m >> 1; end
    return n;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int mx;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 60; blk++) begin
      int len, sh;
      clr = 1; valid = 0; @(negedge clk); clr = 0;
      mx = 0;
      len = $urandom_range(20, 1);
      sh = (blk % 10 == 3) ? 16 : $urandom_range(15, 0);
      for (int i = 0; i < len; i++) begin
        valid = $urandom_range(1, 0);
        for (int l = 0; l < LANES; l++) din[l] = (sh >= 16) ? '0 : W'($signed(W'($urandom)) >>> sh);
        if (valid) for (int l = 0; l < LANES; l++) if (blen($signed(din[l])) > mx) mx = blen($signed(din[l]));
        @(negedge clk);
      end
      valid = 0;
      checks++;
      if (int'(nbits) != mx) begin failures++; $display("blk %0d nbits %0d expected %0d", blk, nbits, mx); end
    end
    // clear together with valid: the new words start the block
    din = '0; din[0] = 16'd5; clr = 1; valid = 1; @(negedge clk); clr = 0; valid = 0;
    checks++; if (nbits != 3) begin failures++; $display("clr+valid gave %0d", nbits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
