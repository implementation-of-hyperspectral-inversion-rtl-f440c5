// tb_mac_lane: rows of random length (1 to 20) with random gaps are fed
// through the lane; every row sum must appear two clocks after the row's
// last product and equal the sum computed here.
module tb_mac_lane;
  localparam int AW = 16, BW = 16, ACCW = 41;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic signed [AW-1:0] a = 0;
  logic signed [BW-1:0] b = 0;
  logic out_valid;
  logic signed [ACCW-1:0] acc;
  mac_lane #(.AW(AW), .BW(BW), .ACCW(ACCW)) dut (.*);
  int checks = 0, failures = 0;
  longint sums [$];
  int     due  [$];
  int     cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // checker
  always @(negedge clk) if (rst_n) begin
    if (due.size() > 0 && due[0] == cyc) begin
      longint s;
      void'(due.pop_front()); s = sums.pop_front();
      checks++;
      if (!out_valid || acc != s) begin failures++; $display("row sum %0d (valid %0b) expected %0d", acc, out_valid, s); end
    end else if (out_valid) begin
      checks++; failures++; $display("unexpected out_valid at %0d", cyc);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      int len;
      longint s;
      len = $urandom_range(20, 1); s = 0;
      for (int i = 0; i < len; i++) begin
        in_valid = 1; in_first = (i == 0); in_last = (i == len - 1);
        a = AW'($urandom); b = BW'($urandom);
        s += longint'(a) * longint'(b);
        if (in_last) begin sums.push_back(s); due.push_back(cyc + 2); end
        @(negedge clk);
        in_valid = 0; in_first = 0; in_last = 0;
        if ($urandom_range(3, 0) == 0) @(negedge clk);
      end
    end
    repeat (4) @(negedge clk);
    checks++; if (sums.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
