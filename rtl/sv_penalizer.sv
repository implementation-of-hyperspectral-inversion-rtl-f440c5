// sv_penalizer: turns singular values xi_r into penalised reciprocals zeta_r.
//
// For r = 0 .. n-1 it reads xi_r and writes
//   TSVD (tik = 0): zeta_r = 1 / xi_r
//   TIK  (tik = 1): zeta_r = xi_r / (xi_r^2 + lambda^2)
// in the same fixed-point format as the inputs (FRAC fraction bits, CW
// bits): zeta = floor(num * 2^(2*FRAC) / den) with num = 1 or xi, computed by
// a restoring divider that produces one quotient bit per clock. A quotient
// that would not fit in CW-1 bits, or a zero denominator, saturates to
// 2^(CW-1)-1. Negative xi are taken as zero. Truncation to R' values is
// done by the caller through n; the TSVD values beyond n are never used.
//
// Timing per value: 1 clock to read, 1 to set up, CW-1 to divide, 1 to
// write (saturated values skip the divide), so at most n*(CW+2)+1 clocks
// from start to done.
module sv_penalizer #(
  parameter int R    = 256,
  parameter int CW   = 16,
  parameter int FRAC = 12,
  localparam int RAW = (R > 1) ? $clog2(R) : 1,
  localparam int NW  = $clog2(R + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 tik,
  input  logic [NW-1:0]        n,
  input  logic [CW-1:0]        lambda,
  output logic [RAW-1:0]       xi_raddr,
  input  logic signed [CW-1:0] xi_rdata,
  output logic                 z_we,
  output logic [RAW-1:0]       z_addr,
  output logic [CW-1:0]        z_data,
  output logic                 busy,
  output logic                 done
);
  localparam int NUMW = CW + 2 * FRAC;
  localparam int DENW = 2 * CW + 1;
  localparam int LW   = ((NUMW > DENW) ? NUMW : DENW) + CW;
  localparam logic [CW-1:0] QMAX = {1'b0, {(CW-1){1'b1}}};

  typedef enum logic [2:0] {P_IDLE, P_READ, P_SETUP, P_DIV, P_WRITE} pstate_e;
  pstate_e state;

  logic [RAW-1:0] r;
  logic [NW-1:0]  n_q;
  logic           tik_q;
  logic [CW-1:0]  lam_q;
  logic [LW-1:0]  rem, den;
  logic [CW-1:0]  q;
  logic [$clog2(CW)-1:0] bitpos;

  wire [CW-1:0] xi_u = xi_rdata[CW-1] ? '0 : xi_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE; r <= '0; n_q <= '0; tik_q <= 1'b0; lam_q <= '0;
      rem <= '0; den <= '0; q <= '0; bitpos <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        P_IDLE: if (start) begin
          state <= P_READ; r <= '0; n_q <= n; tik_q <= tik; lam_q <= lambda;
        end
        P_READ: state <= P_SETUP;      // xi_r arrives next clock
        P_SETUP: begin
          logic [LW-1:0] num, d;
          num = tik_q ? (LW'(xi_u) << (2 * FRAC)) : (LW'(1) << (2 * FRAC));
          d   = tik_q ? LW'(xi_u) * LW'(xi_u) + LW'(lam_q) * LW'(lam_q) : LW'(xi_u);
          rem <= num;
          den <= d;
          bitpos <= $bits(bitpos)'(CW - 2);
          if (d == '0 || num >= (d << (CW - 1))) begin
            q <= QMAX;
            state <= P_WRITE;
          end else begin
            q <= '0;
            state <= P_DIV;
          end
        end
        P_DIV: begin
          if (rem >= (den << bitpos)) begin
            rem <= rem - (den << bitpos);
            q[bitpos] <= 1'b1;
          end
          if (bitpos == '0) state <= P_WRITE;
          else bitpos <= bitpos - 1'b1;
        end
        P_WRITE: begin
          if (NW'(r) == n_q - 1'b1) begin
            state <= P_IDLE;
            done  <= 1'b1;
          end else begin
            r <= r + 1'b1;
            state <= P_READ;
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  assign xi_raddr = r;
  assign z_we     = (state == P_WRITE);
  assign z_addr   = r;
  assign z_data   = q;
  assign busy     = (state != P_IDLE);
endmodule
