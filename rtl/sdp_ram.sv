// sdp_ram: one memory bank with one write port and one registered read port.
//
// Every coefficient bank, the interferogram buffer and each spectrum segment
// of the inversion engines is one of these, sized by DEPTH x W. It models a
// two-port FPGA block RAM: a write on the rising edge when 'we' is high, and
// a read whose data appear on 'rdata' one clock after 'raddr' is presented.
// Reading and writing the same address in one cycle returns the old word.
// Contents are not reset; users load a bank before reading it.
module sdp_ram #(
  parameter int DEPTH = 256,
  parameter int W     = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
