// kmem_colscale: O1 = V * diag(zeta), the column scaling of the penalised
// SVD inversion.
//
// The ROWS x COLS matrix V is split by rows into K banks exactly like
// kmem_matvec with INTERLEAVE = 0 (bank k holds rows k*BR .. k*BR+BR-1, row
// lr, column c at address lr*COLS + c). For each column c < n_cols the
// penalised singular value zeta_c is read once and broadcast; every lane
// multiplies its V element by it and writes (V*zeta) >>> FRAC, saturated to
// CW bits, to o_* at the same bank and address. The parent connects o_* to
// the bank write ports of the O1*O2 product, so O1 never leaves its K
// memories. Columns >= n_cols are not touched (truncated TSVD).
//
// Timing: one column per clock for all K lanes, BR * n_cols clocks of
// issue; writes trail their reads by two clocks; 'done' is high with the
// last write, BR * n_cols + 2 clocks after 'start'.
module kmem_colscale #(
  parameter int K    = 6,
  parameter int ROWS = 256,
  parameter int COLS = 256,
  parameter int CW   = 16,
  parameter int FRAC = 12,
  localparam int BR     = (ROWS + K - 1) / K,
  localparam int BDEPTH = BR * COLS,
  localparam int BAW    = (BDEPTH > 1) ? $clog2(BDEPTH) : 1,
  localparam int CLW    = $clog2(COLS + 1),
  localparam int CAW    = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int LRW    = (BR > 1) ? $clog2(BR) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [K-1:0]          ld_we,
  input  logic [K-1:0][BAW-1:0] ld_addr,
  input  logic [K-1:0][CW-1:0]  ld_data,
  input  logic                  start,
  input  logic [CLW-1:0]        n_cols,
  output logic [CAW-1:0]        vec_raddr,
  input  logic signed [CW-1:0]  vec_rdata,
  output logic [K-1:0]          o_we,
  output logic [K-1:0][BAW-1:0] o_addr,
  output logic [K-1:0][CW-1:0]  o_data,
  output logic                  busy,
  output logic                  done
);
  import hsi_pkg::*;

  logic           run;
  logic [LRW-1:0] lr;
  logic [CAW-1:0] c;
  logic [BAW-1:0] base;
  logic [CLW-1:0] nc_q;

  wire last_col = (CLW'(c) == nc_q - 1'b1);
  wire last_row = (int'(lr) == BR - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; lr <= '0; c <= '0; base <= '0; nc_q <= '0;
    end else if (!run) begin
      if (start) begin
        run <= 1'b1; lr <= '0; c <= '0; base <= '0; nc_q <= n_cols;
      end
    end else if (last_col) begin
      c <= '0; lr <= lr + 1'b1; base <= base + BAW'(COLS);
      if (last_row) run <= 1'b0;
    end else begin
      c <= c + 1'b1;
    end
  end

  assign vec_raddr = c;
  wire [BAW-1:0] raddr = BAW'(base + BAW'(c));

  logic           v1, v2, e1, e2;
  logic [BAW-1:0] a1, a2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; e1 <= 1'b0; e2 <= 1'b0;
    end else begin
      v1 <= run; v2 <= v1;
      e1 <= run && last_col && last_row; e2 <= e1;
    end
  end
  always_ff @(posedge clk) begin
    a1 <= raddr; a2 <= a1;
  end

  for (genvar k = 0; k < K; k++) begin : g_lane
    logic [CW-1:0]          vcoef;
    logic signed [2*CW-1:0] prod;

    sdp_ram #(.DEPTH(BDEPTH), .W(CW)) u_bank (
      .clk(clk), .we(ld_we[k]), .waddr(ld_addr[k]), .wdata(ld_data[k]),
      .raddr(raddr), .rdata(vcoef)
    );

    always_ff @(posedge clk) prod <= signed'(vcoef) * vec_rdata;

    // rows past ROWS in the last bank do not exist
    localparam int NROWS_K = (ROWS - k * BR < BR) ? ROWS - k * BR : BR;
    assign o_we[k]   = v2 && (int'(a2) < NROWS_K * COLS);
    assign o_addr[k] = a2;
    assign o_data[k] = CW'(sat(64'(prod >>> FRAC), CW));
  end

  assign done = e2;
  assign busy = run || v1 || v2;

  always_ff @(posedge clk)
    if (rst_n) a_no_load_busy: assert (!(run && (|ld_we))) else $error("kmem_colscale: load while running");
endmodule
