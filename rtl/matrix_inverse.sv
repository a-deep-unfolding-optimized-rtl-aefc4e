// matrix_inverse -- inverses K_m of the 2x2 diagonal blocks of G that belong
// to the user pairs A_m = {nu_2m, nu_2m+1} of the sorted list.
//
// For G_A = [g11 g12; conj(g12) g22] (g11, g22 real):
//   K_m = 1/det [g22 -g12; -conj(g12) g11],  det = g11 g22 - |g12|^2.
// One unit serves all U/2 blocks in sequence, two cycles per block: the first
// selects the entries and registers det, the second looks up 1/det in a
// reciprocal LUT and registers the scaled adjugate into K[m]. k_count tells
// how many K_m are valid, so a consumer may start as soon as K_1 is ready.
// All U/2 inverses take U cycles, as in the published design.
// Formats: G with 12 fraction bits, det with 24, K with KW = 16 bits and 12
// fraction bits, saturating; a non-positive det (singular block) gives the
// largest reciprocal. Splitting the work over the two cycles and the formats
// are this design's choices.
module matrix_inverse
  import gbcd_pkg::*;
#(
  parameter int unsigned U  = U_UE,
  parameter int unsigned LB = 6
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [U-1:0][$clog2(U)-1:0]      nu,
  input  cplx_g_t [U-1:0][U-1:0]           g,
  output kmat_t [U/2-1:0]                  k,
  output logic [$clog2(U/2+1)-1:0]         k_count,
  output logic                             done
);
  localparam int unsigned MW  = $clog2(U / 2);
  localparam int unsigned DW  = 2 * GW + 2;
  localparam int unsigned RCW = 28;           // 1/det with 12 fraction bits

  logic                         busy, ph;
  logic [MW-1:0]                m;
  logic signed [GW-1:0]         g11_q, g22_q;
  cplx_g_t                      g12_q;
  logic signed [DW-1:0]         det_q;
  logic [RCW-1:0]               rdet;
  logic [DW-2:0]                det_pos;

  assign det_pos = (det_q <= 0) ? '0 : det_q[DW-2:0];

  recip_lut #(.IW(DW-1), .IFRAC(2*G_FRAC), .OW(RCW), .OFRAC(12), .LB(LB)) u_rcp (
    .x(det_pos), .y(rdet));

  function automatic logic signed [KW-1:0] scale(input logic signed [GW-1:0] x, input logic [RCW-1:0] r);
    logic signed [63:0] p;
    p = 64'(x) * $signed({1'b0, 63'(r)});   // 12 + 12 fraction bits
    return KW'(sat_s(p >>> 12, KW));
  endfunction

  // entries of the block selected in the current pair
  logic [$clog2(U)-1:0] i1, i2;
  cplx_g_t              e12;
  assign i1  = nu[2*m];
  assign i2  = nu[2*m+1];
  assign e12 = g[i1][i2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ph <= 1'b0; m <= '0; done <= 1'b0; k_count <= '0; k <= '0;
      g11_q <= '0; g22_q <= '0; g12_q <= '0; det_q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; ph <= 1'b0; m <= '0; k_count <= '0;
      end else if (busy) begin
        if (!ph) begin
          g11_q <= g[i1][i1].re;
          g22_q <= g[i2][i2].re;
          g12_q <= e12;
          det_q <= DW'(g[i1][i1].re * g[i2][i2].re) - DW'(e12.re * e12.re) - DW'(e12.im * e12.im);
          ph <= 1'b1;
        end else begin
          k[m].k11    <= scale(g22_q, rdet);
          k[m].k22    <= scale(g11_q, rdet);
          k[m].k12.re <= scale(-g12_q.re, rdet);
          k[m].k12.im <= scale(-g12_q.im, rdet);
          k_count <= k_count + 1'b1;
          ph <= 1'b0;
          if (m == MW'(U / 2 - 1)) begin
            busy <= 1'b0; done <= 1'b1;
          end
          m <= m + 1'b1;
        end
      end
    end
  end
endmodule
