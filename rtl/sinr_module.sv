// sinr_module -- reciprocal post-equalisation SINR of every user, the key of
// the user sorting.
//
//   SINR_u^-1 = a_u * lambda_u + b_u,  a_u = 1/G_uu^2,  b_u = N0/(Es G_uu)
// After start, one user per cycle (U cycles) looks up r = 1/G_uu in a
// reciprocal LUT and stores a_u = r^2 and b_u = N0 r. In the next cycle all U
// products a_u lambda_u are formed in parallel and the keys are registered;
// done pulses with them, U+1 cycles after start (17 for U = 16), the latency
// of the published design. lambda must be stable from the U-th cycle on.
// Formats: G_uu with 12 fraction bits, lambda with 24 (sum of squares of G),
// N0/Es with 16, keys unsigned ISW = 24 bits with 12 fraction bits, saturating.
// Es = 1 (unit-energy constellation) is this design's normalisation.
module sinr_module
  import gbcd_pkg::*;
#(
  parameter int unsigned U  = U_UE,
  parameter int unsigned LB = 6
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic signed [U-1:0][GW-1:0]   gdiag,
  input  logic signed [U-1:0][ACCW-1:0] lambda,
  input  logic [N0W-1:0]                n0,
  output logic [U-1:0][ISW-1:0]         isinr,
  output logic                          done
);
  localparam int unsigned RW_ = 16;  // reciprocal: 12 fraction bits
  localparam int unsigned CW  = $clog2(U + 1);

  logic [CW-1:0]            cnt;
  logic                     busy;
  logic [U-1:0][ISW-1:0]    a_q, b_q;
  logic [GW-1:0]            g_sel;
  logic [RW_-1:0]           rcp;

  assign g_sel = gdiag[cnt[$clog2(U)-1:0]][GW-1] ? '0 : gdiag[cnt[$clog2(U)-1:0]];

  recip_lut #(.IW(GW), .IFRAC(G_FRAC), .OW(RW_), .OFRAC(12), .LB(LB)) u_rcp (
    .x(g_sel), .y(rcp));

  function automatic logic [ISW-1:0] usat(input logic [63:0] x);
    return (x > 64'((64'd1 << ISW) - 1)) ? '1 : x[ISW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; busy <= 1'b0; done <= 1'b0; a_q <= '0; b_q <= '0; isinr <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; cnt <= '0;
      end else if (busy) begin
        if (cnt < CW'(U)) begin
          // a = r^2 : 24 -> 12 fraction bits ; b = N0 r : 28 -> 12 fraction bits
          a_q[cnt[$clog2(U)-1:0]] <= usat((64'(rcp) * 64'(rcp)) >> 12);
          b_q[cnt[$clog2(U)-1:0]] <= usat((64'(n0) * 64'(rcp)) >> 16);
          cnt <= cnt + 1'b1;
        end else begin
          for (int u = 0; u < int'(U); u++) begin
            // a (12) * lambda (24) -> 36 fraction bits -> 12; lambda >= 0
            isinr[u] <= usat(((64'(a_q[u]) * (lambda[u][ACCW-1] ? 64'd0 : 64'(lambda[u]))) >> 24)
                             + 64'(b_q[u]));
          end
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
