// fft_bank_mem: the multi-bank data memory of the BFP FFT engine.
//
// R banks of DEPTH complex words (W bits, real part in the upper half) are
// accessed in parallel, so the R operands of a radix-R butterfly are read
// and its R results written back in the same cycle. Each bank has its own
// read and write address; read data come one clock after the address. Which
// point lives in which bank is decided by the address generator (fft_agu):
// for radix 2 the bank is the parity of the point index, so the two operands
// of any butterfly are always in different banks.
module fft_bank_mem #(
  parameter int R     = 2,
  parameter int DEPTH = 128,
  parameter int W     = 32,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic [R-1:0]          we,
  input  logic [R-1:0][AW-1:0]  waddr,
  input  logic [R-1:0][W-1:0]   wdata,
  input  logic [R-1:0][AW-1:0]  raddr,
  output logic [R-1:0][W-1:0]   rdata
);
  for (genvar b = 0; b < R; b++) begin : g_bank
    sdp_ram #(.DEPTH(DEPTH), .W(W)) u_bank (
      .clk  (clk),
      .we   (we[b]),
      .waddr(waddr[b]),
      .wdata(wdata[b]),
      .raddr(raddr[b]),
      .rdata(rdata[b])
    );
  end
endmodule
