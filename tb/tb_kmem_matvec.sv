// tb_kmem_matvec: two engines, one with contiguous and one with
// interleaved row banks (K = 3 banks over 10 rows, so the last bank is
// short), are loaded with the same random 10 x 7 matrix and run on random
// vectors for several (n_rows, n_cols) sizes. Every row result must equal
// sat((sum a*v) >>> FRAC) computed here, rows >= n_rows must be masked off,
// and start-to-done must take (rows per lane) * n_cols + 3 clocks.
// A third engine holds the matrix twice, interleaved in its first region
// and in contiguous blocks in its second, and alternates between the two
// regions from run to run; it must agree with the same model.
module tb_kmem_matvec;
  localparam int K = 3, ROWS = 10, COLS = 7, CW = 16, VW = 16, OW = 20, FRAC = 8;
  localparam int BR = (ROWS + K - 1) / K, BAW = $clog2(BR * COLS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][K-1:0]          ld_we;
  logic [1:0][K-1:0][BAW-1:0] ld_addr;
  logic [K-1:0][CW-1:0]       ld_data;
  logic start = 0;
  logic [$clog2(ROWS+1)-1:0] n_rows = '0;
  logic [$clog2(COLS+1)-1:0] n_cols = '0;
  logic [1:0][$clog2(COLS)-1:0] vec_raddr;
  logic signed [VW-1:0] vec_rdata [2];
  logic [1:0] res_valid, busy, done;
  logic [1:0][K-1:0] res_mask;
  logic [1:0][K-1:0][$clog2(ROWS)-1:0] res_row;
  logic [1:0][$clog2(BR)-1:0] res_lrow;
  logic [1:0][K-1:0][OW-1:0] res_data;

  for (genvar il = 0; il < 2; il++) begin : g_dut
    kmem_matvec #(.K(K), .ROWS(ROWS), .COLS(COLS), .CW(CW), .VW(VW), .OW(OW), .FRAC(FRAC), .INTERLEAVE(il[0])) dut (
      .clk(clk), .rst_n(rst_n), .ld_we(ld_we[il]), .ld_addr(ld_addr[il]), .ld_data(ld_data),
      .start(start), .sel2(1'b0), .n_rows(n_rows), .n_cols(n_cols),
      .vec_raddr(vec_raddr[il]), .vec_rdata(vec_rdata[il]),
      .res_valid(res_valid[il]), .res_mask(res_mask[il]), .res_row(res_row[il]), .res_lrow(res_lrow[il]),
      .res_data(res_data[il]), .busy(busy[il]), .done(done[il])
    );
  end

  // two-region engine
  localparam int BAW2 = $clog2(2 * BR * COLS);
  logic [K-1:0]           ld_we2;
  logic [K-1:0][BAW2-1:0] ld_addr2;
  logic                   sel2 = 0;
  logic [$clog2(COLS)-1:0] vec_raddr2;
  logic signed [VW-1:0]   vec_rdata2;
  logic                   res_valid2, busy2, done2;
  logic [K-1:0]           res_mask2;
  logic [K-1:0][$clog2(ROWS)-1:0] res_row2;
  logic [$clog2(BR)-1:0]  res_lrow2;
  logic [K-1:0][OW-1:0]   res_data2;

  kmem_matvec #(.K(K), .ROWS(ROWS), .COLS(COLS), .CW(CW), .VW(VW), .OW(OW), .FRAC(FRAC), .INTERLEAVE(1'b1),
                .ROWS2(ROWS), .COLS2(COLS), .INTERLEAVE2(1'b0)) dut2 (
    .clk(clk), .rst_n(rst_n), .ld_we(ld_we2), .ld_addr(ld_addr2), .ld_data(ld_data),
    .start(start), .sel2(sel2), .n_rows(n_rows), .n_cols(n_cols),
    .vec_raddr(vec_raddr2), .vec_rdata(vec_rdata2),
    .res_valid(res_valid2), .res_mask(res_mask2), .res_row(res_row2), .res_lrow(res_lrow2),
    .res_data(res_data2), .busy(busy2), .done(done2)
  );

  logic signed [CW-1:0] A [ROWS][COLS];
  logic signed [VW-1:0] vec [COLS];
  always_ff @(posedge clk) begin
    vec_rdata[0] <= vec[vec_raddr[0]];
    vec_rdata[1] <= vec[vec_raddr[1]];
    vec_rdata2   <= vec[vec_raddr2];
  end

  int checks = 0, failures = 0;
  int seen [3][ROWS];

  function automatic longint ref_row(int r, int nc);
    longint s, hi, lo;
    s = 0;
    for (int c = 0; c < nc; c++) s += longint'(A[r][c]) * longint'(vec[c]);
    s = s >>> FRAC;
    hi = (64'sd1 <<< (OW - 1)) - 1; lo = -(64'sd1 <<< (OW - 1));
    return (s > hi) ? hi : (s < lo) ? lo : s;
  endfunction

  // result checker
  always @(negedge clk) if (rst_n) begin
    for (int il = 0; il < 2; il++)
      if (res_valid[il])
        for (int k = 0; k < K; k++) begin
          int row, erow;
          row  = int'(res_row[il][k]);
          erow = il ? int'(res_lrow[il]) * K + k : k * BR + int'(res_lrow[il]);
          checks++;
          if (row != erow) begin failures++; $display("il=%0d lane %0d row %0d expected %0d", il, k, row, erow); end
          checks++;
          if (res_mask[il][k] != (row < int'(n_rows))) begin failures++; $display("mask il=%0d row %0d", il, row); end
          if (res_mask[il][k]) begin
            longint e;
            e = ref_row(row, int'(n_cols));
            seen[il][row]++;
            checks++;
            if (longint'($signed(res_data[il][k])) != e) begin
              failures++;
              if (failures < 10) $display("il=%0d row %0d got %0d expected %0d", il, row, $signed(res_data[il][k]), e);
            end
          end
        end
  end

  always @(negedge clk) if (rst_n && res_valid2)
    for (int k = 0; k < K; k++) begin
      int row, erow;
      row  = int'(res_row2[k]);
      erow = sel2 ? k * BR + int'(res_lrow2) : int'(res_lrow2) * K + k;
      checks++;
      if (row != erow) begin failures++; $display("two-region sel2=%0d lane %0d row %0d expected %0d", sel2, k, row, erow); end
      if (res_mask2[k] != (row < int'(n_rows))) begin failures++; $display("two-region mask row %0d", row); end
      if (res_mask2[k]) begin
        seen[2][row]++;
        checks++;
        if (longint'($signed(res_data2[k])) != ref_row(row, int'(n_cols))) begin
          failures++;
          if (failures < 10) $display("two-region sel2=%0d row %0d got %0d expected %0d", sel2, row, $signed(res_data2[k]), ref_row(row, int'(n_cols)));
        end
      end
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ld_we = '0; ld_addr = '0; ld_data = '0; ld_we2 = '0; ld_addr2 = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int cyc, lanes_rows [2];
      // load a new matrix (both layouts)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          A[r][c] = CW'($urandom);
          if (trial == 5) A[r][c] = 16'sh7fff;
          ld_we = '0;
          ld_we[0][r / BR] = 1'b1; ld_addr[0][r / BR] = BAW'((r % BR) * COLS + c);
          ld_we[1][r % K]  = 1'b1; ld_addr[1][r % K]  = BAW'((r / K) * COLS + c);
          for (int k = 0; k < K; k++) ld_data[k] = A[r][c];
          ld_we2 = '0;
          ld_we2[r % K] = 1'b1; ld_addr2[r % K] = BAW2'((r / K) * COLS + c);
          @(negedge clk);
          ld_we2 = '0;
          ld_we2[r / BR] = 1'b1; ld_addr2[r / BR] = BAW2'(BR * COLS + (r % BR) * COLS + c);
          @(negedge clk);
        end
      ld_we = '0; ld_we2 = '0;
      sel2 = trial[0];
      for (int c = 0; c < COLS; c++) vec[c] = (trial == 5) ? 16'sh7fff : VW'($urandom);
      n_rows = (trial < 2) ? ROWS : $urandom_range(ROWS, 1);
      n_cols = (trial < 2) ? COLS : $urandom_range(COLS, 1);
      for (int il = 0; il < 3; il++) for (int r = 0; r < ROWS; r++) seen[il][r] = 0;
      lanes_rows[0] = (int'(n_rows) < BR) ? int'(n_rows) : BR;
      lanes_rows[1] = (int'(n_rows) + K - 1) / K;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      fork
        begin : w0
          automatic int c0;
          c0 = cyc;
          while (!done[0]) begin @(negedge clk); c0++; end
          checks++;
          if (c0 != lanes_rows[0] * int'(n_cols) + 3) begin failures++; $display("contiguous latency %0d", c0); end
        end
        begin : w1
          automatic int c1;
          c1 = cyc;
          while (!done[1]) begin @(negedge clk); c1++; end
          checks++;
          if (c1 != lanes_rows[1] * int'(n_cols) + 3) begin failures++; $display("interleaved latency %0d", c1); end
        end
        begin : w2
          automatic int c2;
          c2 = cyc;
          while (!done2) begin @(negedge clk); c2++; end
          checks++;
          if (c2 != lanes_rows[sel2 ? 0 : 1] * int'(n_cols) + 3) begin failures++; $display("two-region latency %0d", c2); end
        end
      join
      @(negedge clk);
      for (int il = 0; il < 3; il++)
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (seen[il][r] != (r < int'(n_rows) ? 1 : 0)) begin failures++; $display("il=%0d row %0d produced %0d times", il, r, seen[il][r]); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
