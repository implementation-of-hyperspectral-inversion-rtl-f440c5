// pinv_engine: spectrum reconstruction by pseudo-inverse, x = A_dagger * y.
//
// The N x M matrix A_dagger is computed off line and loaded row by row; its
// rows are split into K contiguous blocks, one per memory bank, and
// kmem_matvec multiplies all K banks by the broadcast interferogram at once.
// The spectrum is stored in K segments matching the banks (segment k holds
// x[k*BR .. k*BR+BR-1], BR = ceil(N/K)), so the K results of a row group are
// written in one clock.
//
// Interface: a_we/a_row/a_col/a_data write one coefficient while idle.
// The interferogram is not stored here: y_raddr/y_rdata read the parent's
// buffer (one clock latency). 'start' runs one inversion; 'done' pulses when
// the spectrum is complete. out_data shows x[out_idx] one clock after
// out_idx.
//
// Timing: BR * M + 3 clocks from start to done (K-fold faster than one
// memory). Coefficients are CW-bit signed with FRAC fraction bits; results
// are (sum a*y) >>> FRAC saturated to OW bits.
module pinv_engine #(
  parameter int N    = 256,
  parameter int M    = 256,
  parameter int K    = 6,
  parameter int DW   = 16,
  parameter int CW   = 16,
  parameter int OW   = 24,
  parameter int FRAC = 12,
  localparam int NW  = (N > 1) ? $clog2(N) : 1,
  localparam int MW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 a_we,
  input  logic [NW-1:0]        a_row,
  input  logic [MW-1:0]        a_col,
  input  logic [CW-1:0]        a_data,
  input  logic                 start,
  output logic [MW-1:0]        y_raddr,
  input  logic signed [DW-1:0] y_rdata,
  input  logic [NW-1:0]        out_idx,
  output logic signed [OW-1:0] out_data,
  output logic                 busy,
  output logic                 done
);
  localparam int BR     = (N + K - 1) / K;
  localparam int BDEPTH = BR * M;
  localparam int BAW    = (BDEPTH > 1) ? $clog2(BDEPTH) : 1;
  localparam int LRW    = (BR > 1) ? $clog2(BR) : 1;
  localparam int KW     = (K > 1) ? $clog2(K) : 1;

  // host write -> bank and local address
  logic [K-1:0]          ld_we;
  logic [K-1:0][BAW-1:0] ld_addr;
  logic [K-1:0][CW-1:0]  ld_data;
  always_comb begin
    int bank, lrow;
    bank = int'(a_row) / BR;
    lrow = int'(a_row) % BR;
    for (int k = 0; k < K; k++) begin
      ld_we[k]   = a_we && (bank == k);
      ld_addr[k] = BAW'(lrow * M + int'(a_col));
      ld_data[k] = a_data;
    end
  end

  logic                   res_valid;
  logic [K-1:0]           res_mask;
  logic [LRW-1:0]         res_lrow;
  logic [K-1:0][OW-1:0]   res_data;

  kmem_matvec #(.K(K), .ROWS(N), .COLS(M), .CW(CW), .VW(DW), .OW(OW), .FRAC(FRAC), .INTERLEAVE(1'b0)) u_mv (
    .clk(clk), .rst_n(rst_n), .ld_we(ld_we), .ld_addr(ld_addr), .ld_data(ld_data),
    .start(start), .sel2(1'b0), .n_rows($clog2(N + 1)'(N)), .n_cols($clog2(M + 1)'(M)),
    .vec_raddr(y_raddr), .vec_rdata(y_rdata),
    .res_valid(res_valid), .res_mask(res_mask), .res_row(), .res_lrow(res_lrow),
    .res_data(res_data), .busy(busy), .done(done)
  );

  // spectrum segments
  logic [K-1:0][OW-1:0] seg_rdata;
  logic [KW-1:0]        sel_q;
  for (genvar k = 0; k < K; k++) begin : g_seg
    sdp_ram #(.DEPTH(BR), .W(OW)) u_seg (
      .clk(clk), .we(res_valid && res_mask[k]), .waddr(res_lrow), .wdata(res_data[k]),
      .raddr(LRW'(int'(out_idx) % BR)), .rdata(seg_rdata[k])
    );
  end
  always_ff @(posedge clk) sel_q <= KW'(int'(out_idx) / BR);
  assign out_data = signed'(seg_rdata[sel_q]);
endmodule
