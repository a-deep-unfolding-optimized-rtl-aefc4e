// pe_a -- processing element A of the reconfigurable PE array.
//
// A two-dimensional dot product with accumulation, as drawn for PE-A in the
// published architecture: two multipliers, an adder for the two products and an
// accumulating adder whose feedback path passes a mux that selects 0 to start a
// new sum.
//   en & clr : acc <= x0*y0 + x1*y1
//   en & !clr: acc <= acc + x0*y0 + x1*y1
//   !en      : acc holds
// Used alone it computes squared magnitudes (diagonal of the Gram matrix and the
// interference terms lambda_u); two of them form the complex MAC PE-B.
// Timing: result visible one cycle after the operands. Widths are this design's
// choice (operands OPW bits, accumulator ACCW bits, no saturation: the
// accumulator is wide enough for 128 products of 15-bit operands).
module pe_a #(
  parameter int unsigned OW = 15,
  parameter int unsigned AW = 36
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,
  input  logic signed [OW-1:0] x0, y0, x1, y1,
  output logic signed [AW-1:0] acc
);
  logic signed [2*OW:0] dot;
  assign dot = (2*OW+1)'(x0 * y0) + (2*OW+1)'(x1 * y1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (en)  acc <= (clr ? '0 : acc) + AW'(dot);
  end
endmodule
