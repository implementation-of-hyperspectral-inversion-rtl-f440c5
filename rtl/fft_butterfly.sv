// fft_butterfly: the radix-2 butterfly processing element.
//
// Computes x = a + w*b and y = a - w*b on complex DW-bit operands with a
// complex TW-bit twiddle (TW-2 fraction bits). Stage 1 registers the four
// real products and a; stage 2 forms w*b (products shifted right by TW-2,
// truncating) and registers the sum and difference. Results are DW+2 bits
// wide, enough for the worst-case growth 1 + sqrt(2) of one stage; the
// block-floating-point shifter after the butterfly brings them back to DW
// bits. Latency two clocks, one butterfly per clock.
module fft_butterfly #(
  parameter int DW  = 16,
  parameter int TW  = 16,
  localparam int OW = DW + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] a_re, a_im, b_re, b_im,
  input  logic signed [TW-1:0] w_re, w_im,
  output logic                 out_valid,
  output logic signed [OW-1:0] x_re, x_im, y_re, y_im
);
  localparam int PW = DW + TW;

  logic signed [PW-1:0] p_rr, p_ii, p_ri, p_ir;
  logic signed [DW-1:0] a_re_q, a_im_q;
  logic                 v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1 <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    p_rr   <= b_re * w_re;
    p_ii   <= b_im * w_im;
    p_ri   <= b_re * w_im;
    p_ir   <= b_im * w_re;
    a_re_q <= a_re;
    a_im_q <= a_im;
  end

  logic signed [PW:0]   t_re_w, t_im_w;
  logic signed [OW-1:0] t_re, t_im;
  always_comb begin
    t_re_w = (PW+1)'(p_rr) - (PW+1)'(p_ii);
    t_im_w = (PW+1)'(p_ri) + (PW+1)'(p_ir);
    t_re   = OW'(t_re_w >>> (TW - 2));
    t_im   = OW'(t_im_w >>> (TW - 2));
  end

  always_ff @(posedge clk) begin
    x_re <= OW'(a_re_q) + t_re;
    x_im <= OW'(a_im_q) + t_im;
    y_re <= OW'(a_re_q) - t_re;
    y_im <= OW'(a_im_q) - t_im;
  end
endmodule
