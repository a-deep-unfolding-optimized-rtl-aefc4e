// pe_b -- processing element B: two PE-As operated as one complex MAC.
//
// Complex mode (split = 0): the operands are split into real and imaginary
// parts and routed so that
//   acc_re += Re(conj(a) b) = a.re*b.re + a.im*b.im
//   acc_im += Im(conj(a) b) = a.re*b.im - a.im*b.re
// The conjugation is a negation of one imaginary part in front of the second
// PE-A, which makes this one unit serve both G = H^H H and y^MF = H^H y.
// Split mode (split = 1): the two PE-As work on their own and accumulate the
// squared magnitudes |a|^2 (acc_re) and |b|^2 (acc_im); the array uses this for
// the diagonal entries of G and for the interference terms.
// The pairing of two PE-As into a complex MAC follows the published design; the
// split mode is this design's way of reusing the pair as two stand-alone PE-As.
// Timing: one cycle, as pe_a.
module pe_b
  import gbcd_pkg::*;
#(
  parameter int unsigned OW = OPW,
  parameter int unsigned AW = ACCW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,
  input  logic                 split,
  input  logic signed [OW-1:0] a_re, a_im, b_re, b_im,
  output logic signed [AW-1:0] acc_re,
  output logic signed [AW-1:0] acc_im
);
  logic signed [OW-1:0] x0_1, x1_1, y0_0, y1_0, y0_1, y1_1;

  always_comb begin
    // PE-A 0: first operand is always a
    y0_0 = split ? a_re : b_re;
    y1_0 = split ? a_im : b_im;
    // PE-A 1
    x0_1 = split ? b_re : a_re;
    x1_1 = split ? b_im : -a_im;   // "neg": conjugate of a
    y0_1 = split ? b_re : b_im;
    y1_1 = split ? b_im : b_re;
  end

  pe_a #(.OW(OW), .AW(AW)) u_re (
    .clk, .rst_n, .en, .clr, .x0(a_re), .y0(y0_0), .x1(a_im), .y1(y1_0), .acc(acc_re));
  pe_a #(.OW(OW), .AW(AW)) u_im (
    .clk, .rst_n, .en, .clr, .x0(x0_1), .y0(y0_1), .x1(x1_1), .y1(y1_1), .acc(acc_im));
endmodule
