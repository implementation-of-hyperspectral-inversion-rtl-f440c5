// kmem_matvec: matrix-vector product with the matrix split over K memories.
//
// The ROWS x COLS coefficient matrix is divided by rows into K banks, each
// with its own multiply-accumulate lane; the vector element of the current
// column is read once and broadcast to all lanes, so K rows are produced in
// the time one memory would take for a single row. With INTERLEAVE = 0 bank
// k holds the contiguous rows k*BR .. k*BR+BR-1 (BR = ceil(ROWS/K)); with
// INTERLEAVE = 1 it holds rows k, k+K, k+2K, ... Within a bank, row lr,
// column c is at address lr*COLS + c. Row results are (sum of products)
// >>> FRAC, saturated to OW bits.
//
// A second matrix (ROWS2 x COLS2, its own layout INTERLEAVE2) may share the
// banks and lanes: it sits in each bank after the first one, from address
// BASE2 = BR*COLS on, and a run selects it with 'sel2'. Two products that
// never run at the same time then cost one set of K multipliers. With
// ROWS2 = 0 (the default) there is no second region. While one region is
// being read, the other may be written.
//
// Interface: the banks are written through one write port per bank (ld_*,
// bank-local addresses; the second region starts at BASE2) while idle,
// or, during a run, into the other region only. 'start' runs over the first n_rows rows
// and n_cols columns. The vector is read through vec_raddr/vec_rdata (one
// clock latency, supplied by the parent). Each time a group of K rows
// completes, res_valid is high for one clock with res_data[k], res_row[k]
// (global row) and res_mask[k] (row exists) for every lane, and res_lrow
// (the bank-local row). 'done' is high with the last group. 'sel2' is
// sampled with 'start'; n_rows/n_cols then refer to the selected matrix.
//
// Timing: one column per clock for all K lanes; start to done takes
// ceil-or-min(n_rows) * n_cols + 3 clocks (ceil(n_rows/K) rows per lane when
// interleaved, min(BR, n_rows) when contiguous).
//
// The row split over K memories with one multiplier each, and the
// contiguous row blocks, follow the reference design. The interleaved
// layout, the shared second region, the saturation and the widths are this
// implementation's choices.
module kmem_matvec #(
  parameter int K          = 6,
  parameter int ROWS       = 256,
  parameter int COLS       = 256,
  parameter int CW         = 16,
  parameter int VW         = 16,
  parameter int OW         = 24,
  parameter int FRAC       = 12,
  parameter bit INTERLEAVE = 1'b0,
  parameter int ROWS2       = 0,
  parameter int COLS2       = 1,
  parameter bit INTERLEAVE2 = 1'b0,
  localparam int BR     = (ROWS + K - 1) / K,
  localparam int BR2    = (ROWS2 + K - 1) / K,
  localparam int BASE2  = BR * COLS,
  localparam int BDEPTH = BR * COLS + BR2 * COLS2,
  localparam int MROWS  = (ROWS2 > ROWS) ? ROWS2 : ROWS,
  localparam int MCOLS  = (ROWS2 > 0 && COLS2 > COLS) ? COLS2 : COLS,
  localparam int MBR    = (BR2 > BR) ? BR2 : BR,
  localparam int BAW    = (BDEPTH > 1) ? $clog2(BDEPTH) : 1,
  localparam int RW     = $clog2(MROWS + 1),
  localparam int CLW    = $clog2(MCOLS + 1),
  localparam int CAW    = (MCOLS > 1) ? $clog2(MCOLS) : 1,
  localparam int ROWW   = (MROWS > 1) ? $clog2(MROWS) : 1,
  localparam int LRW    = (MBR > 1) ? $clog2(MBR) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [K-1:0]                ld_we,
  input  logic [K-1:0][BAW-1:0]       ld_addr,
  input  logic [K-1:0][CW-1:0]        ld_data,
  input  logic                        start,
  input  logic                        sel2,
  input  logic [RW-1:0]               n_rows,
  input  logic [CLW-1:0]              n_cols,
  output logic [CAW-1:0]              vec_raddr,
  input  logic signed [VW-1:0]        vec_rdata,
  output logic                        res_valid,
  output logic [K-1:0]                res_mask,
  output logic [K-1:0][ROWW-1:0]      res_row,
  output logic [LRW-1:0]              res_lrow,
  output logic [K-1:0][OW-1:0]        res_data,
  output logic                        busy,
  output logic                        done
);
  import hsi_pkg::*;

  localparam int ACCW = CW + VW + $clog2(MCOLS) + 1;

  logic              run;
  logic [LRW-1:0]    lr;
  logic [CAW-1:0]    c;
  logic [BAW-1:0]    base;
  logic [LRW:0]      lr_n;     // local rows to process
  logic [CLW-1:0]    nc_q;
  logic [RW-1:0]     nr_q;
  logic              sel_q;    // region of the current run
  logic              il_q;     // its row layout
  logic [LRW:0]      br_q;     // its rows per bank
  logic [BAW-1:0]    stride_q; // its row length in the bank

  wire last_col = (CLW'(c) == nc_q - 1'b1);
  wire last_row = ((LRW+1)'(lr) == lr_n - 1'b1);

  // rows per lane for this run
  logic [LRW:0] lr_need;
  always_comb begin
    int br;
    br = sel2 ? BR2 : BR;
    if (sel2 ? INTERLEAVE2 : INTERLEAVE) lr_need = (LRW+1)'((int'(n_rows) + K - 1) / K);
    else                                 lr_need = (int'(n_rows) < br) ? (LRW+1)'(n_rows) : (LRW+1)'(br);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; lr <= '0; c <= '0; base <= '0;
      lr_n <= '0; nc_q <= '0; nr_q <= '0;
      sel_q <= 1'b0; il_q <= INTERLEAVE; br_q <= (LRW+1)'(BR); stride_q <= BAW'(COLS);
    end else if (!run) begin
      if (start) begin
        run <= 1'b1; lr <= '0; c <= '0;
        base     <= sel2 ? BAW'(BASE2) : '0;
        lr_n <= lr_need; nc_q <= n_cols; nr_q <= n_rows;
        sel_q    <= sel2;
        il_q     <= sel2 ? INTERLEAVE2 : INTERLEAVE;
        br_q     <= sel2 ? (LRW+1)'(BR2) : (LRW+1)'(BR);
        stride_q <= sel2 ? BAW'(COLS2) : BAW'(COLS);
      end
    end else begin
      if (last_col) begin
        c    <= '0;
        lr   <= lr + 1'b1;
        base <= base + stride_q;
        if (last_row) run <= 1'b0;
      end else begin
        c <= c + 1'b1;
      end
    end
  end

  assign vec_raddr = c;

  // pipeline tags: issue -> memory data (1) -> MAC out (3)
  logic           v1, f1, l1, e1;
  logic [LRW-1:0] lr1, lr2, lr3;
  logic           e2, e3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; e1 <= 1'b0; e2 <= 1'b0; e3 <= 1'b0;
    end else begin
      v1 <= run; f1 <= run && (c == '0); l1 <= run && last_col; e1 <= run && last_col && last_row;
      e2 <= e1; e3 <= e2;
    end
  end
  always_ff @(posedge clk) begin
    lr1 <= lr; lr2 <= lr1; lr3 <= lr2;
  end

  logic [K-1:0] lane_ov;
  for (genvar k = 0; k < K; k++) begin : g_lane
    logic [CW-1:0]          coef;
    logic signed [ACCW-1:0] acc;

    sdp_ram #(.DEPTH(BDEPTH), .W(CW)) u_bank (
      .clk(clk), .we(ld_we[k]), .waddr(ld_addr[k]), .wdata(ld_data[k]),
      .raddr(BAW'(base + BAW'(c))), .rdata(coef)
    );

    mac_lane #(.AW(CW), .BW(VW), .ACCW(ACCW)) u_mac (
      .clk(clk), .rst_n(rst_n), .in_valid(v1), .in_first(f1), .in_last(l1),
      .a(signed'(coef)), .b(vec_rdata), .out_valid(lane_ov[k]), .acc(acc)
    );

    always_comb begin
      int row;
      row = il_q ? int'(lr3) * K + k : k * int'(br_q) + int'(lr3);
      res_row[k]  = ROWW'(row);
      res_mask[k] = (row < int'(nr_q));
      res_data[k] = OW'(sat(64'(acc >>> FRAC), OW));
    end
  end

  assign res_valid = lane_ov[0];
  assign res_lrow  = lr3;
  assign done      = lane_ov[0] && e3;
  assign busy      = run || v1 || lane_ov[0] || e2;

  // all lanes run in lockstep
  always_ff @(posedge clk)
    if (rst_n) a_lockstep: assert (lane_ov == '0 || lane_ov == '1) else $error("kmem_matvec: lanes out of step");

  // a running product's own region is not written
  always_ff @(posedge clk)
    if (rst_n && run)
      for (int k = 0; k < K; k++)
        if (ld_we[k])
          a_no_load_busy: assert (sel_q ? (int'(ld_addr[k]) < BASE2) : (int'(ld_addr[k]) >= BASE2))
            else $error("kmem_matvec: load into the region being read");
endmodule
