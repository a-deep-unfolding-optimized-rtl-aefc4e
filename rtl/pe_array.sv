// pe_array -- the reconfigurable array of U^2 PE-As, grouped as U^2/2 PE-B
// slots, with the U multi-operand adders of the matched-filter mode.
//
// Every slot is a pe_b whose operands, enable and split flag come from the
// arbiter; clr starts a new accumulation in all enabled slots. The array
// computes the upper triangle of G in B cycles (Gram mode), y^MF in 2B/U cycles
// (MF mode) or the interference terms in U-1 cycles (interference mode).
// mf_sum[i] adds the U/2 slot results of column i (slots i*U/2 .. i*U/2+U/2-1),
// as the multi-operand adder of each MF column does.
// Timing: accumulators update at the clock edge; mf_sum is combinational from
// the accumulators, so it is valid the cycle after the last MF operands.
// The PE counts and the per-column adder follow the published design.
module pe_array
  import gbcd_pkg::*;
#(
  parameter int unsigned U  = U_UE,
  parameter int unsigned AW = ACCW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic    [U*U/2-1:0]           en,
  input  logic    [U*U/2-1:0]           split,
  input  cplx_op_t [U*U/2-1:0]          a,
  input  cplx_op_t [U*U/2-1:0]          b,
  output logic signed [U*U/2-1:0][AW-1:0] acc_re,
  output logic signed [U*U/2-1:0][AW-1:0] acc_im,
  output logic signed [U-1:0][AW-1:0]     mf_sum_re,
  output logic signed [U-1:0][AW-1:0]     mf_sum_im
);
  localparam int unsigned NS = U * U / 2;

  for (genvar s = 0; s < int'(NS); s++) begin : g_slot
    pe_b #(.OW(OPW), .AW(AW)) u_peb (
      .clk, .rst_n, .en(en[s]), .clr, .split(split[s]),
      .a_re(a[s].re), .a_im(a[s].im), .b_re(b[s].re), .b_im(b[s].im),
      .acc_re(acc_re[s]), .acc_im(acc_im[s]));
  end

  always_comb begin
    for (int i = 0; i < int'(U); i++) begin
      mf_sum_re[i] = '0;
      mf_sum_im[i] = '0;
      for (int j = 0; j < int'(U / 2); j++) begin
        mf_sum_re[i] = mf_sum_re[i] + acc_re[i*(U/2)+j];
        mf_sum_im[i] = mf_sum_im[i] + acc_im[i*(U/2)+j];
      end
    end
  end
endmodule
