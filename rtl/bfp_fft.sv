// bfp_fft: memory-based radix-2 FFT in block floating point with
// post-butterfly normalisation.
//
// The N complex points sit in two banks (fft_bank_mem). A single butterfly
// processes one pair per clock: the address generator picks the two
// operands, pre_bf_rotation hands them to the butterfly in operand order,
// the result is shifted by the stage's block shift (bfp_shifter), rotated
// back to its banks (post_bf_rotation) and written in place, and the
// leading-bit calculator watches every word written. All words of a stage
// share one exponent. The shift applied to the results of stage s is
// derived from the leading bit of the results of stage s-1 (for stage 0,
// of the loaded samples): shift = nbits - (DW-1-GUARD). A stage's own growth
// is therefore only corrected one stage later, which is why GUARD = 3
// integer bits are kept free for the growth of two successive stages. The
// shifts add up in 'exponent'; the true result is mantissa * 2^exponent.
//
// Interface: load the N points in natural order through in_we/in_idx/in_re/
// in_im while idle (they are stored bit-reversed); pulse 'start' (with
// 'inverse' to conjugate the twiddles, no 1/N scaling); 'done' pulses when
// the transform is complete. Results are read in natural order: out_re/
// out_im show point out_idx one clock after it is presented, while idle.
//
// Timing: one butterfly per clock inside a stage (N/2 clocks), then DRAIN
// clocks so the next stage reads only written data; start to done takes
// log2(N) * (N/2 + DRAIN) + 1 clocks.
//
// The structure follows the parallel-memory FFT of the design (banks,
// rotations, shifter, leading-bit calculator, butterfly); the DIT ordering,
// the parity bank mapping, the drain between stages and the word widths are
// this implementation's choices.
module bfp_fft #(
  parameter int NFFT   = 256,
  parameter int DW     = 16,
  parameter int TW     = 16,
  parameter int GUARD  = 3,
  parameter int EW     = 8,
  localparam int LOGN  = $clog2(NFFT),
  localparam int IDXW  = LOGN,
  localparam int DRAIN = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // load
  input  logic                   in_we,
  input  logic [IDXW-1:0]        in_idx,
  input  logic signed [DW-1:0]   in_re,
  input  logic signed [DW-1:0]   in_im,
  // control
  input  logic                   start,
  input  logic                   inverse,
  output logic                   busy,
  output logic                   done,
  // read-out
  input  logic [IDXW-1:0]        out_idx,
  output logic signed [DW-1:0]   out_re,
  output logic signed [DW-1:0]   out_im,
  output logic signed [EW-1:0]   exponent
);
  localparam int HALF   = NFFT / 2;
  localparam int BAW    = (LOGN > 1) ? LOGN - 1 : 1;
  localparam int SBW    = (LOGN > 1) ? $clog2(LOGN) : 1;
  localparam int CW     = 2 * DW;            // complex word {re, im}
  localparam int BW     = DW + 2;            // butterfly output width
  localparam int SW     = $clog2(DW) + 2;    // signed shift amount
  localparam int NBW    = $clog2(DW + 1);
  localparam int TARGET = DW - 1 - GUARD;    // magnitude bits after normalisation

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [SBW-1:0]       stage;
  logic [BAW-1:0]       bf;
  logic [2:0]           drain_cnt;
  logic signed [SW-1:0] shamt;
  logic                 inv_q;

  // ---------------- address generation ----------------
  logic [LOGN-1:0]     idx_a, idx_b;
  logic [1:0][BAW-1:0] agu_raddr;
  logic                agu_rot;
  logic [BAW-1:0]      tw_k;

  fft_agu #(.NFFT(NFFT)) u_agu (
    .stage(stage), .bf(bf), .idx_a(idx_a), .idx_b(idx_b),
    .raddr(agu_raddr), .rot(agu_rot), .tw_k(tw_k)
  );

  wire issue = (state == S_RUN);

  // ---------------- memory ----------------
  logic [1:0]          mem_we;
  logic [1:0][BAW-1:0] mem_waddr, mem_raddr;
  logic [1:0][CW-1:0]  mem_wdata, mem_rdata;

  fft_bank_mem #(.R(2), .DEPTH(HALF), .W(CW)) u_mem (
    .clk(clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .raddr(mem_raddr), .rdata(mem_rdata)
  );

  // bit-reversed storage position of a loaded point
  logic [LOGN-1:0] in_pos;
  always_comb begin
    for (int b = 0; b < LOGN; b++) in_pos[b] = in_idx[LOGN-1-b];
  end

  // read address: engine when running, read-out port when idle
  always_comb begin
    if (state == S_IDLE) begin
      mem_raddr[0] = BAW'(out_idx >> 1);
      mem_raddr[1] = BAW'(out_idx >> 1);
    end else begin
      mem_raddr = agu_raddr;
    end
  end

  // ---------------- twiddles ----------------
  logic signed [TW-1:0] w_re, w_im;
  twiddle_rom #(.NFFT(NFFT), .TW(TW)) u_tw (
    .clk(clk), .k(tw_k), .inverse(inv_q), .w_re(w_re), .w_im(w_im)
  );

  // ---------------- pipeline bookkeeping ----------------
  // issue (t) -> data & twiddle (t+1) -> butterfly out (t+3) -> write
  logic                v1;
  logic                rot1, rot2, rot3;
  logic [1:0][BAW-1:0] wa1, wa2, wa3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= issue;
  end

  always_ff @(posedge clk) begin
    rot1 <= agu_rot;   rot2 <= rot1; rot3 <= rot2;
    wa1  <= agu_raddr; wa2  <= wa1;  wa3  <= wa2;
  end

  // ---------------- pre-rotation and butterfly ----------------
  logic [1:0][CW-1:0] ops;
  pre_bf_rotation #(.R(2), .W(CW)) u_pre (.rot(rot1), .din(mem_rdata), .dout(ops));

  logic                 bf_valid;
  logic signed [BW-1:0] x_re, x_im, y_re, y_im;
  fft_butterfly #(.DW(DW), .TW(TW)) u_bf (
    .clk(clk), .rst_n(rst_n), .in_valid(v1),
    .a_re(ops[0][CW-1:DW]), .a_im(ops[0][DW-1:0]),
    .b_re(ops[1][CW-1:DW]), .b_im(ops[1][DW-1:0]),
    .w_re(w_re), .w_im(w_im),
    .out_valid(bf_valid), .x_re(x_re), .x_im(x_im), .y_re(y_re), .y_im(y_im)
  );

  // ---------------- post-butterfly normalisation ----------------
  logic [3:0][DW-1:0] shifted;
  bfp_shifter #(.LANES(4), .IW(BW), .OW(DW), .SW(SW)) u_shift (
    .shamt(shamt), .din({y_im, y_re, x_im, x_re}), .dout(shifted)
  );

  logic [1:0][CW-1:0] res_bank;
  post_bf_rotation #(.R(2), .W(CW)) u_post (
    .rot(rot3), .din({{shifted[2], shifted[3]}, {shifted[0], shifted[1]}}), .dout(res_bank)
  );

  // write port: butterfly results while running, loaded samples when idle
  always_comb begin
    mem_we    = '0;
    mem_waddr = wa3;
    mem_wdata = res_bank;
    if (state == S_IDLE) begin
      mem_we[^in_pos]    = in_we;
      mem_waddr[0]       = BAW'(in_pos >> 1);
      mem_waddr[1]       = BAW'(in_pos >> 1);
      mem_wdata[0]       = {in_re, in_im};
      mem_wdata[1]       = {in_re, in_im};
    end else if (bf_valid) begin
      mem_we = 2'b11;
    end
  end

  // ---------------- leading bit ----------------
  logic               lb_clr, lb_valid;
  logic [3:0][DW-1:0] lb_din;
  logic [NBW-1:0]     nbits;

  leading_bit_calc #(.LANES(4), .W(DW)) u_lb (
    .clk(clk), .rst_n(rst_n), .clr(lb_clr), .valid(lb_valid), .din(lb_din), .nbits(nbits)
  );

  wire signed [SW-1:0] next_shift = SW'(signed'({1'b0, nbits})) - SW'(TARGET);
  wire                 stage_end  = (state == S_DRAIN) && (drain_cnt == 3'd0);
  wire                 last_stage = (int'(stage) == LOGN - 1);

  always_comb begin
    if (state == S_IDLE) begin
      lb_valid = in_we;
      lb_din   = {DW'(0), DW'(0), in_im, in_re};
      lb_clr   = start;
    end else begin
      lb_valid = bf_valid;
      lb_din   = shifted;
      lb_clr   = stage_end;
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      stage     <= '0;
      bf        <= '0;
      drain_cnt <= '0;
      shamt     <= '0;
      exponent  <= '0;
      inv_q     <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_RUN;
          stage    <= '0;
          bf       <= '0;
          inv_q    <= inverse;
          shamt    <= next_shift;
          exponent <= EW'(next_shift);
        end
        S_RUN: begin
          bf <= bf + 1'b1;
          if (bf == BAW'(HALF - 1)) begin
            state     <= S_DRAIN;
            drain_cnt <= 3'(DRAIN - 1);
          end
        end
        S_DRAIN: begin
          if (drain_cnt != 3'd0) drain_cnt <= drain_cnt - 1'b1;
          else if (last_stage) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state    <= S_RUN;
            stage    <= stage + 1'b1;
            bf       <= '0;
            shamt    <= next_shift;
            exponent <= exponent + EW'(next_shift);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------- read-out ----------------
  logic sel_q;
  always_ff @(posedge clk) sel_q <= ^out_idx;
  assign out_re = mem_rdata[sel_q][CW-1:DW];
  assign out_im = mem_rdata[sel_q][DW-1:0];

  // the engine is not fed while it runs
  // the two operands of a butterfly never share a bank
  always_ff @(posedge clk)
    if (rst_n && issue) a_no_conflict: assert ((^idx_a) != (^idx_b)) else $error("bfp_fft: bank conflict");

  always_ff @(posedge clk)
    if (rst_n) a_no_load_busy: assert (!(busy && in_we)) else $error("bfp_fft: load while busy");
endmodule
