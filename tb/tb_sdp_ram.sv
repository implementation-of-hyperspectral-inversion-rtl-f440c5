// tb_sdp_ram: writes random words to random addresses of one bank, keeps a
// shadow copy, and checks every read one clock after its address,
// including a read of the address being written in the same clock (the
// old word must come back).
module tb_sdp_ram;
  localparam int DEPTH = 64, W = 16, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  sdp_ram #(.DEPTH(DEPTH), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] shadow [DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; waddr = AW'(i); wdata = W'($urandom); shadow[i] = wdata; @(negedge clk);
    end
    for (int i = 0; i < 2000; i++) begin
      logic [W-1:0] expect_q;
      raddr = AW'($urandom);
      we = $urandom_range(1, 0);
      waddr = (i % 3 == 0) ? raddr : AW'($urandom);
      wdata = W'($urandom);
      expect_q = shadow[raddr];
      @(negedge clk);
      if (we) shadow[waddr] = wdata;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 5) $display("addr %0d read %h expected %h", raddr, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
