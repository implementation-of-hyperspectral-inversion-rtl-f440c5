// svd_engine: spectrum reconstruction by penalised SVD (TSVD or Tikhonov),
// x = V * Xi' * U^T * y.
//
// The factors of the transfer matrix (U^T: R x M, V: N x R, singular values
// xi: R) are loaded once; the penalty (truncation rank R' or ridge lambda)
// can change with every run, so Xi' is recomputed each time. Three
// products over K memories run as the data flow allows:
//   O2 = U^T y        rows of U^T interleaved over the banks, so that a
//                     truncation to R' rows still uses every lane;
//   zeta, then O1 = V diag(zeta)   sv_penalizer turns xi into 1/xi or
//                     xi/(xi^2+l^2); kmem_colscale then scales the columns
//                     of V (its own K multipliers). This chain runs beside
//                     O2 = U^T y;
//   x  = O1 O2        once both are complete; contiguous row blocks.
// U^T y and O1 O2 never run together, so they share one kmem_matvec: each
// of its K banks holds a block of U^T rows and, behind it, a block of O1
// rows, which kmem_colscale writes straight into place. The engine thus
// has 2K multipliers (K lanes + K column scalers) and one divider.
// TSVD uses n = R' singular values, TIK all R; only the first n rows of U^T
// and columns of V are touched, so the work is about R'(2N+M) products
// divided by K.
//
// Interface: c_we/c_sel/c_row/c_col/c_data load U^T (row r, col m), V (row
// n, col r) or xi (index in c_col) while idle. 'start' with 'tik', 'r_keep'
// (TSVD rank, 1..R) and 'lambda' runs one inversion; 'done' pulses when the
// spectrum is ready; out_data shows x[out_idx] one clock later. The
// interferogram is read from the parent through y_raddr/y_rdata.
//
// Fixed point: U, V, xi, lambda and zeta are CW-bit with FRAC fraction bits;
// O2 and x are OW-bit; each product narrows by >>> FRAC with saturation.
// Timing: a run takes max(ceil(R'/K)*M + 3, P + 1 + ceil(N/K)*R' + 2)
// + ceil(N/K)*R' + 5 clocks, where P is the penalizer time (at most
// R'*(CW+2)+1 clocks; R' = R for TIK).
//
// The three K-memory products, the R'(2N+M) work and the two multipliers
// per memory follow the reference design. Computing zeta on chip, letting
// U^T y overlap the O1 chain, and storing U^T and O1 in the same banks are
// this implementation's choices.
module svd_engine #(
  parameter int N    = 256,
  parameter int M    = 256,
  parameter int R    = 256,
  parameter int K    = 6,
  parameter int DW   = 16,
  parameter int CW   = 16,
  parameter int OW   = 24,
  parameter int FRAC = 12,
  localparam int RCW = $clog2(((N > R) ? N : R)),
  localparam int CCW = $clog2(((M > R) ? M : R)),
  localparam int NW  = (N > 1) ? $clog2(N) : 1,
  localparam int MW  = (M > 1) ? $clog2(M) : 1,
  localparam int RNW = $clog2(R + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 c_we,
  input  hsi_pkg::coef_sel_e   c_sel,
  input  logic [RCW-1:0]       c_row,
  input  logic [CCW-1:0]       c_col,
  input  logic [CW-1:0]        c_data,
  input  logic                 start,
  input  logic                 tik,
  input  logic [RNW-1:0]       r_keep,
  input  logic [CW-1:0]        lambda,
  output logic [MW-1:0]        y_raddr,
  input  logic signed [DW-1:0] y_rdata,
  input  logic [NW-1:0]        out_idx,
  output logic signed [OW-1:0] out_data,
  output logic                 busy,
  output logic                 done
);
  import hsi_pkg::*;

  localparam int RAW  = (R > 1) ? $clog2(R) : 1;
  localparam int BRU  = (R + K - 1) / K;            // U^T rows per bank
  localparam int BRN  = (N + K - 1) / K;            // V / O1 rows per bank
  localparam int UAW  = (BRU * M > 1) ? $clog2(BRU * M) : 1;
  localparam int VAW  = (BRN * R > 1) ? $clog2(BRN * R) : 1;
  localparam int LRNW = (BRN > 1) ? $clog2(BRN) : 1;
  localparam int KW   = (K > 1) ? $clog2(K) : 1;

  typedef enum logic [1:0] {V_IDLE, V_PH_AB, V_PH_C} vstate_e;
  vstate_e state;
  logic [RNW-1:0] nk;          // singular values used in this run
  logic           a_mv_done, b_done;

  // ---------------- host loads ----------------
  logic [K-1:0]          u_we, v_we;
  logic [K-1:0][UAW-1:0] u_addr;
  logic [K-1:0][VAW-1:0] v_addr;
  logic [K-1:0][CW-1:0]  ld_data;
  always_comb begin
    int ub, ul, vb, vl;
    ub = int'(c_row) % K;   ul = int'(c_row) / K;     // interleaved U^T rows
    vb = int'(c_row) / BRN; vl = int'(c_row) % BRN;   // contiguous V rows
    for (int k = 0; k < K; k++) begin
      u_we[k]    = c_we && (c_sel == SEL_SVD_UT) && (ub == k);
      v_we[k]    = c_we && (c_sel == SEL_SVD_V)  && (vb == k);
      u_addr[k]  = UAW'(ul * M + int'(c_col));
      v_addr[k]  = VAW'(vl * R + int'(c_col));
      ld_data[k] = c_data;
    end
  end

  // ---------------- singular values and penalised values ----------------
  logic [RAW-1:0]       xi_raddr, z_waddr, z_raddr;
  logic signed [CW-1:0] xi_rdata, z_rdata;
  logic                 z_we;
  logic [CW-1:0]        z_wdata;

  sdp_ram #(.DEPTH(R), .W(CW)) u_xi (
    .clk(clk), .we(c_we && (c_sel == SEL_SVD_XI)), .waddr(RAW'(c_col)), .wdata(c_data),
    .raddr(xi_raddr), .rdata(xi_rdata)
  );

  logic pen_start, pen_done;
  sv_penalizer #(.R(R), .CW(CW), .FRAC(FRAC)) u_pen (
    .clk(clk), .rst_n(rst_n), .start(pen_start), .tik(tik), .n(nk_next()), .lambda(lambda),
    .xi_raddr(xi_raddr), .xi_rdata(xi_rdata),
    .z_we(z_we), .z_addr(z_waddr), .z_data(z_wdata), .busy(), .done(pen_done)
  );

  sdp_ram #(.DEPTH(R), .W(CW)) u_zeta (
    .clk(clk), .we(z_we), .waddr(z_waddr), .wdata(z_wdata),
    .raddr(z_raddr), .rdata(z_rdata)
  );

  // number of singular values for the run being started
  function automatic logic [RNW-1:0] nk_next();
    if (tik || r_keep == '0 || int'(r_keep) > R) return RNW'(R);
    return r_keep;
  endfunction

  // ---------------- shared K-lane product: O2 = U^T y, then x = O1 O2 ----------------
  // Region 1 of each bank holds rows of U^T (interleaved), region 2 rows
  // of O1 (contiguous blocks). The two products never overlap, so they
  // share one set of K multiply-accumulate lanes.
  localparam int VW    = (OW > DW) ? OW : DW;
  localparam int BAW   = (BRU * M + BRN * R > 1) ? $clog2(BRU * M + BRN * R) : 1;
  localparam int BASE2 = BRU * M;
  localparam int MRW   = $clog2(((R > N) ? R : N) + 1);
  localparam int MCW   = $clog2(((M > R) ? M : R) + 1);
  localparam int MCA   = (((M > R) ? M : R) > 1) ? $clog2((M > R) ? M : R) : 1;
  localparam int MRA   = (((R > N) ? R : N) > 1) ? $clog2((R > N) ? R : N) : 1;
  localparam int MLR   = (((BRU > BRN) ? BRU : BRN) > 1) ? $clog2((BRU > BRN) ? BRU : BRN) : 1;

  logic [K-1:0]          o1_we;
  logic [K-1:0][VAW-1:0] o1_addr;
  logic [K-1:0][CW-1:0]  o1_data;

  logic [K-1:0]          mv_we;
  logic [K-1:0][BAW-1:0] mv_addr;
  logic [K-1:0][CW-1:0]  mv_data;
  always_comb begin
    for (int k = 0; k < K; k++) begin
      mv_we[k]   = u_we[k] || o1_we[k];
      mv_addr[k] = o1_we[k] ? BAW'(BASE2 + int'(o1_addr[k])) : BAW'(u_addr[k]);
      mv_data[k] = o1_we[k] ? o1_data[k] : ld_data[k];
    end
  end

  logic                  mv_start, mv_sel2, mv_valid, mv_done;
  logic [MRW-1:0]        mv_nrows;
  logic [MCW-1:0]        mv_ncols;
  logic [MCA-1:0]        mv_vaddr;
  logic signed [VW-1:0]  mv_vdata;
  logic [K-1:0]          mv_mask;
  logic [K-1:0][MRA-1:0] mv_row;
  logic [MLR-1:0]        mv_lrow;
  logic [K-1:0][OW-1:0]  mv_data_o;

  kmem_matvec #(.K(K), .ROWS(R), .COLS(M), .CW(CW), .VW(VW), .OW(OW), .FRAC(FRAC), .INTERLEAVE(1'b1),
                .ROWS2(N), .COLS2(R), .INTERLEAVE2(1'b0)) u_mv (
    .clk(clk), .rst_n(rst_n), .ld_we(mv_we), .ld_addr(mv_addr), .ld_data(mv_data),
    .start(mv_start), .sel2(mv_sel2), .n_rows(mv_nrows), .n_cols(mv_ncols),
    .vec_raddr(mv_vaddr), .vec_rdata(mv_vdata),
    .res_valid(mv_valid), .res_mask(mv_mask), .res_row(mv_row), .res_lrow(mv_lrow),
    .res_data(mv_data_o), .busy(), .done(mv_done)
  );

  logic ua_start, ua_done, oc_start, oc_done;
  assign mv_start = ua_start || oc_start;
  assign mv_sel2  = oc_start;
  assign mv_nrows = ua_start ? MRW'(nk_next()) : MRW'(N);
  assign mv_ncols = ua_start ? MCW'(M) : MCW'(nk);
  assign ua_done  = mv_done && (state == V_PH_AB);
  assign oc_done  = mv_done && (state == V_PH_C);

  // vector source: y for U^T y, O2 for O1 O2 (data one clock after address)
  logic signed [OW-1:0] o2 [R];
  logic signed [OW-1:0] o2_rdata;
  assign y_raddr  = MW'(mv_vaddr);
  assign mv_vdata = (state == V_PH_C) ? VW'(o2_rdata) : VW'(y_rdata);

  always_ff @(posedge clk) begin
    if (mv_valid && state == V_PH_AB)
      for (int k = 0; k < K; k++)
        if (mv_mask[k]) o2[RAW'(mv_row[k])] <= signed'(mv_data_o[k]);
    o2_rdata <= o2[RAW'(mv_vaddr)];
  end

  // ---------------- O1 = V diag(zeta) ----------------
  logic vb_start, vb_done;

  kmem_colscale #(.K(K), .ROWS(N), .COLS(R), .CW(CW), .FRAC(FRAC)) u_v (
    .clk(clk), .rst_n(rst_n), .ld_we(v_we), .ld_addr(v_addr), .ld_data(ld_data),
    .start(vb_start), .n_cols($clog2(R + 1)'(nk)),
    .vec_raddr(z_raddr), .vec_rdata(z_rdata),
    .o_we(o1_we), .o_addr(o1_addr), .o_data(o1_data), .busy(), .done(vb_done)
  );

  wire                  oc_valid = mv_valid && (state == V_PH_C);
  wire [K-1:0]          oc_mask  = mv_mask;
  wire [LRNW-1:0]       oc_lrow  = LRNW'(mv_lrow);
  wire [K-1:0][OW-1:0]  oc_data  = mv_data_o;

  // ---------------- spectrum segments ----------------
  logic [K-1:0][OW-1:0] seg_rdata;
  logic [KW-1:0]        sel_q;
  for (genvar k = 0; k < K; k++) begin : g_seg
    sdp_ram #(.DEPTH(BRN), .W(OW)) u_seg (
      .clk(clk), .we(oc_valid && oc_mask[k]), .waddr(oc_lrow), .wdata(oc_data[k]),
      .raddr(LRNW'(int'(out_idx) % BRN)), .rdata(seg_rdata[k])
    );
  end
  always_ff @(posedge clk) sel_q <= KW'(int'(out_idx) / BRN);
  assign out_data = signed'(seg_rdata[sel_q]);

  // ---------------- sequencing ----------------
  assign pen_start = (state == V_IDLE) && start;
  assign ua_start  = (state == V_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= V_IDLE; nk <= '0; a_mv_done <= 1'b0; b_done <= 1'b0;
      vb_start <= 1'b0; oc_start <= 1'b0; done <= 1'b0;
    end else begin
      vb_start <= 1'b0; oc_start <= 1'b0; done <= 1'b0;
      unique case (state)
        V_IDLE: if (start) begin
          state <= V_PH_AB; nk <= nk_next(); a_mv_done <= 1'b0; b_done <= 1'b0;
        end
        V_PH_AB: begin
          if (ua_done)  a_mv_done <= 1'b1;
          if (pen_done) vb_start  <= 1'b1;     // zeta complete: O1 may start
          if (vb_done)  b_done    <= 1'b1;
          if ((a_mv_done || ua_done) && (b_done || vb_done)) begin
            state <= V_PH_C; oc_start <= 1'b1;
          end
        end
        V_PH_C: if (oc_done) begin
          state <= V_IDLE; done <= 1'b1;
        end
        default: state <= V_IDLE;
      endcase
    end
  end

  assign busy = (state != V_IDLE);

  always_ff @(posedge clk)
    if (rst_n) a_no_load_busy: assert (!(busy && c_we)) else $error("svd_engine: load while running");
endmodule
