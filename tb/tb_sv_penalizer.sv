// tb_sv_penalizer: random singular values (including zero and negative
// ones) are turned into zeta in TSVD and in TIK mode with random lambda.
// Each written value must equal floor(2^(2F)/xi) or floor(xi 2^(2F) /
// (xi^2+lambda^2)), saturated to 2^(CW-1)-1, exactly n values must be
// written, and the run must end within n*(CW+2)+1 clocks.
module tb_sv_penalizer;
  localparam int R = 20, CW = 16, FRAC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, tik = 0;
  logic [$clog2(R+1)-1:0] n = '0;
  logic [CW-1:0] lambda = '0;
  logic [$clog2(R)-1:0] xi_raddr, z_addr;
  logic signed [CW-1:0] xi_rdata;
  logic z_we, busy, done;
  logic [CW-1:0] z_data;
  sv_penalizer #(.R(R), .CW(CW), .FRAC(FRAC)) dut (.*);

  logic signed [CW-1:0] xi [R];
  always_ff @(posedge clk) xi_rdata <= xi[xi_raddr];
  logic [CW-1:0] zo [R];
  int nwr;
  always @(negedge clk) if (z_we) begin zo[z_addr] = z_data; nwr++; end

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 10; trial++) begin
      int cyc;
      for (int r = 0; r < R; r++) xi[r] = CW'($urandom_range(4000, 0) >> $urandom_range(10, 0));
      xi[0] = 0; xi[1] = -5; xi[2] = 16'd256; xi[3] = 16'd1;
      tik = trial[0];
      lambda = CW'($urandom_range(600, 0));
      n = (trial < 2) ? R : $urandom_range(R, 1);
      nwr = 0;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > int'(n) * (CW + 2) + 1) begin failures++; $display("too slow: %0d", cyc); end
      checks++;
      if (nwr != int'(n)) begin failures++; $display("%0d writes for n=%0d", nwr, n); end
      for (int r = 0; r < int'(n); r++) begin
        longint x, num, den, q;
        x = (xi[r] < 0) ? 0 : longint'(xi[r]);
        num = tik ? (x << (2 * FRAC)) : (64'sd1 << (2 * FRAC));
        den = tik ? x * x + longint'(lambda) * longint'(lambda) : x;
        q = (den == 0) ? 32767 : num / den;
        if (q > 32767) q = 32767;
        checks++;
        if (longint'(zo[r]) != q) begin
          failures++;
          if (failures < 10) $display("tik=%0d r=%0d xi=%0d lambda=%0d got %0d expected %0d", tik, r, xi[r], lambda, zo[r], q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
