// tb_kmem_colscale: a random 10 x 7 matrix V in K = 3 contiguous row banks
// is scaled by random column factors zeta for several n_cols. The writes
// are collected into a model of the receiving banks; each element must be
// sat((V*zeta) >>> FRAC) for columns < n_cols, columns >= n_cols must not be
// written, rows past the matrix must not be written, and start-to-done must
// take BR * n_cols + 2 clocks.
module tb_kmem_colscale;
  localparam int K = 3, ROWS = 10, COLS = 7, CW = 16, FRAC = 8;
  localparam int BR = (ROWS + K - 1) / K, BAW = $clog2(BR * COLS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [K-1:0] ld_we = '0;
  logic [K-1:0][BAW-1:0] ld_addr = '0;
  logic [K-1:0][CW-1:0] ld_data = '0;
  logic start = 0;
  logic [$clog2(COLS+1)-1:0] n_cols = '0;
  logic [$clog2(COLS)-1:0] vec_raddr;
  logic signed [CW-1:0] vec_rdata;
  logic [K-1:0] o_we;
  logic [K-1:0][BAW-1:0] o_addr;
  logic [K-1:0][CW-1:0] o_data;
  logic busy, done;
  kmem_colscale #(.K(K), .ROWS(ROWS), .COLS(COLS), .CW(CW), .FRAC(FRAC)) dut (.*);

  logic signed [CW-1:0] V [ROWS][COLS];
  logic signed [CW-1:0] z [COLS];
  logic [CW-1:0] outm [K][BR*COLS];
  bit            wr   [K][BR*COLS];
  always_ff @(posedge clk) vec_rdata <= z[vec_raddr];
  always @(negedge clk) for (int k = 0; k < K; k++) if (o_we[k]) begin outm[k][o_addr[k]] = o_data[k]; wr[k][o_addr[k]] = 1; end

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      int cyc;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          V[r][c] = CW'($urandom);
          ld_we = '0; ld_we[r / BR] = 1; ld_addr[r / BR] = BAW'((r % BR) * COLS + c);
          for (int k = 0; k < K; k++) ld_data[k] = V[r][c];
          @(negedge clk);
        end
      ld_we = '0;
      for (int c = 0; c < COLS; c++) z[c] = CW'($urandom);
      for (int k = 0; k < K; k++) for (int a = 0; a < BR * COLS; a++) wr[k][a] = 0;
      n_cols = (trial == 0) ? COLS : $urandom_range(COLS, 1);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != BR * int'(n_cols) + 2) begin failures++; $display("latency %0d", cyc); end
      @(negedge clk);
      for (int k = 0; k < K; k++)
        for (int lr = 0; lr < BR; lr++)
          for (int c = 0; c < COLS; c++) begin
            int r, a;
            r = k * BR + lr; a = lr * COLS + c;
            checks++;
            if (r >= ROWS || c >= int'(n_cols)) begin
              if (wr[k][a]) begin failures++; $display("unexpected write bank %0d addr %0d", k, a); end
            end else begin
              longint e;
              e = (longint'(V[r][c]) * longint'(z[c])) >>> FRAC;
              if (e > 32767) e = 32767;
              if (e < -32768) e = -32768;
              if (!wr[k][a] || longint'($signed(outm[k][a])) != e) begin
                failures++;
                if (failures < 10) $display("r=%0d c=%0d got %0d expected %0d", r, c, $signed(outm[k][a]), e);
              end
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
