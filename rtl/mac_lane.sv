// mac_lane: one multiply-accumulate lane of the matrix-vector engines.
//
// Each valid cycle multiplies a coefficient 'a' by a vector element 'b' and
// adds the product to a running sum; 'in_first' starts a new sum and
// 'in_last' marks the final product of a row. Stage 1 registers the
// product, stage 2 the sum, so the row sum appears on 'acc' with
// 'out_valid' two clocks after the cycle carrying 'in_last'. One product per
// clock; ACCW must hold the longest row sum without overflow.
module mac_lane #(
  parameter int AW   = 16,
  parameter int BW   = 16,
  parameter int ACCW = 41
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic signed [AW-1:0]   a,
  input  logic signed [BW-1:0]   b,
  output logic                   out_valid,
  output logic signed [ACCW-1:0] acc
);
  logic signed [AW+BW-1:0] p;
  logic                    v1, f1, l1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0;
      out_valid <= 1'b0;
      acc <= '0;
    end else begin
      v1 <= in_valid; f1 <= in_first; l1 <= in_last;
      out_valid <= v1 && l1;
      if (v1) acc <= f1 ? ACCW'(p) : acc + ACCW'(p);
    end
  end

  always_ff @(posedge clk) p <= a * b;
endmodule
