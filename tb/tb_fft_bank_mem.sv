// tb_fft_bank_mem: the two banks are written and read at different
// addresses in the same clock; each bank must behave as an independent
// memory (checked against two shadow arrays).
module tb_fft_bank_mem;
  localparam int R = 2, DEPTH = 32, W = 32, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic [R-1:0] we = '0;
  logic [R-1:0][AW-1:0] waddr = '0, raddr = '0;
  logic [R-1:0][W-1:0] wdata = '0, rdata;
  fft_bank_mem #(.R(R), .DEPTH(DEPTH), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] shadow [R][DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      for (int b = 0; b < R; b++) begin
        we[b] = 1; waddr[b] = AW'(i); wdata[b] = $urandom; shadow[b][i] = wdata[b];
      end
      @(negedge clk);
    end
    for (int i = 0; i < 1000; i++) begin
      logic [R-1:0][W-1:0] e;
      for (int b = 0; b < R; b++) begin
        raddr[b] = AW'($urandom); we[b] = $urandom_range(1, 0);
        waddr[b] = AW'($urandom); wdata[b] = $urandom;
        e[b] = shadow[b][raddr[b]];
      end
      @(negedge clk);
      for (int b = 0; b < R; b++) begin
        if (we[b]) shadow[b][waddr[b]] = wdata[b];
        checks++;
        if (rdata[b] !== e[b]) begin failures++; $display("bank %0d mismatch", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
