// llr_module -- max-log soft outputs from the final unconstrained estimates
// s_hat = v^(K).
//
// For user u with channel gain mu = G_uu/(G_uu + alpha) and noise-plus-
// interference variance xi = Es (1 - mu) mu (Es = 1), the max-log LLR of a bit
// of the real (or imaginary) part is
//   LLR_b = mu^2/xi * h_b(s_hat/mu),
//   h_b(t) = min_{a: bit b = 0} (t - a)^2 - min_{a: bit b = 1} (t - a)^2,
// over the sqrt(Q)-PAM points a. h_b is piecewise linear and is evaluated by
// a PLM in LLR mode, one table per bit. Since mu^2/xi = G_uu/alpha and
// 1/mu = 1 + alpha/G_uu, the circuit needs one reciprocal LUT for 1/G_uu and
// the trained alpha and 1/alpha, which arrive with the tables in "par".
// Timing: start captures the U estimates; users 0..U-1 are then processed one
// per cycle and their LLRs leave registered one cycle later (llr_valid,
// llr_ue), so a vector takes U cycles and a new one may start every U cycles.
// llr[b] holds bit b of the real part, llr[NLLRB+b] bit b of the imaginary
// part; bits beyond log2(Q)/2 (qam latched with the tables) are zero.
// Formats: s_hat 8 fraction bits, t 16 bits/8, h 18 bits/12, LLR 18 bits/4.
// The published circuit computes mu and xi with a reciprocal LUT for
// 1/(G_uu + alpha); the rearranged but equal expression above is this
// design's choice, as are all formats.
module llr_module
  import gbcd_pkg::*;
#(
  parameter int unsigned U  = U_UE,
  parameter int unsigned LB = 6
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  par_t                          par,
  input  logic [1:0]                    qam,
  input  logic                          start,
  input  cplx_v_t [U-1:0]               s_hat,
  input  logic signed [U-1:0][GW-1:0]   gdiag,
  output logic                          busy,
  output logic                          llr_valid,
  output logic [$clog2(U)-1:0]          llr_ue,
  output logic signed [2*NLLRB-1:0][LLRW-1:0] llr
);
  localparam int unsigned TW = 16, TFRAC = 8;   // normalised input t
  localparam int unsigned HW_ = 18, HFRAC = 12; // h_b
  localparam int unsigned IGW = 20;             // 1/G, 12 fraction bits

  cplx_v_t [U-1:0]        s_q;
  logic [$clog2(U)-1:0]   cnt;
  logic                   run;
  logic [PW-1:0]          alpha_q, ialpha_q;
  logic [1:0]             qam_q;

  logic [GW-1:0]          g_u;
  logic [IGW-1:0]         inv_g;
  logic signed [1:0][TW-1:0]  t;
  logic signed [NLLRB-1:0][1:0][HW_-1:0] h;
  logic signed [63:0]     gain;

  assign busy = run;
  assign g_u  = gdiag[cnt][GW-1] ? '0 : gdiag[cnt];

  recip_lut #(.IW(GW), .IFRAC(G_FRAC), .OW(IGW), .OFRAC(12), .LB(LB)) u_rcp (.x(g_u), .y(inv_g));

  always_comb begin
    logic [63:0] nrm;
    // 1/mu = 1 + alpha/G (12 fraction bits)
    nrm  = (64'd1 << 12) + ((64'(alpha_q) * 64'(inv_g)) >> ALPHA_FRAC);
    t[0] = TW'(sat_s((64'(s_q[cnt].re) * $signed(nrm)) >>> 12, TW));
    t[1] = TW'(sat_s((64'(s_q[cnt].im) * $signed(nrm)) >>> 12, TW));
    // mu^2/xi = G/alpha, with 12 + 4 = 16 fraction bits
    gain = $signed(64'(g_u) * 64'(ialpha_q));
  end

  for (genvar b = 0; b < int'(NLLRB); b++) begin : g_bit
    plm #(.LANES(2), .NB(NBIN), .IW(TW), .IFRAC(TFRAC), .OW(HW_), .OFRAC(HFRAC)) u_plm (
      .clk, .rst_n, .init_we(par.valid), .init_idx(par.idx), .init_ent(par.ent[K_ITER + b]),
      .x(t), .y(h[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; cnt <= '0; run <= 1'b0; alpha_q <= '0; ialpha_q <= '0; qam_q <= '0;
      llr_valid <= 1'b0; llr_ue <= '0; llr <= '0;
    end else begin
      if (par.valid) begin
        alpha_q  <= par.alpha;
        ialpha_q <= par.inv_alpha;
        qam_q    <= qam;
      end
      llr_valid <= run;
      llr_ue    <= cnt;
      if (run) begin
        for (int b = 0; b < int'(NLLRB); b++)
          for (int d = 0; d < 2; d++) begin
            // gain (16) * h (12) -> 28 fraction bits -> LLR_FRAC
            llr[d*NLLRB+b] <= (b <= int'(qam_q)) ?
              LLRW'(sat_s((gain * 64'($signed(h[b][d]))) >>> (16 + HFRAC - LLR_FRAC), LLRW)) : '0;
          end
      end
      if (start) begin
        s_q <= s_hat; cnt <= '0; run <= 1'b1;
      end else if (run) begin
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(U))'(U - 1)) run <= 1'b0;
      end
    end
  end
endmodule
