// preprocessor -- channel preprocessing and matched filtering on the shared,
// reconfigurable PE array.
//
// Per coherence block (after pre_start, with H already in the H array):
//   Gram    : rows 0..B-1 of H, one per cycle, into the PE array (B cycles).
//   capture : one cycle later the upper triangle of G is copied into the G
//             register file (lower triangle by conjugation). This waits while
//             eq_busy says the equalizer still works on the previous block,
//             the accumulators simply hold meanwhile.
//   interf. : U-1 cycles on the diagonal PE-As give lambda_u; the cycle after
//             they are captured the PE array is free again, B+U cycles after
//             pre_start when nothing waits.
//   SINR    : started with the interference step, U+1 cycles (sinr_module);
//   sort    : bitonic network, 10 cycles; inverse: U cycles (matrix_inverse).
// Matched filtering of one receive vector (mf_start, only while the array is
// free; see mf_ready) takes 2B/U cycles on U x U/2 PE-Bs and one more for the
// multi-operand adders; y^MF is then registered and ymf_valid pulses once.
// Back-to-back vectors are accepted every 2B/U cycles.
// Formats: G = acc >> 10 (22 -> 12 fraction bits), y^MF = acc >> 8 (22 -> 14),
// both saturating to 15 and 18 bits.
// The PE-array schedule and cycle counts follow the published design; the
// capture guard, the handshakes and the rounding are this design's own.
module preprocessor
  import gbcd_pkg::*;
#(
  parameter int unsigned B = B_ANT,
  parameter int unsigned U = U_UE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // control
  input  logic                          pre_start,
  output logic                          pre_busy,    // pre_start .. last K_m
  output logic                          g_cap,       // pulse: new G captured
  input  logic                          eq_busy,
  input  logic                          mf_start,
  output logic                          mf_ready,    // mf_start accepted now
  input  logic [N0W-1:0]                n0,
  // input memories
  output logic [$clog2(B)-1:0]          h_rd_base,
  input  cplx_h_t [U/2-1:0][U-1:0]      h_rows,
  output logic [$clog2(2*B/U)-1:0]      y_rd_chunk,
  input  cplx_h_t [U/2-1:0]             y_chunk,
  output logic                          y_pop,
  // results
  output cplx_g_t [U-1:0][U-1:0]        g,
  output cplx_r_t [U-1:0]               ymf,
  output logic                          ymf_valid,
  output logic [U-1:0][$clog2(U)-1:0]   nu,
  output kmat_t [U/2-1:0]               k,
  output logic [$clog2(U/2+1)-1:0]      k_count,
  output logic [U-1:0][ISW-1:0]         isinr,
  output pe_mode_e                      pe_mode
);
  localparam int unsigned NS  = U * U / 2;
  localparam int unsigned NP  = U * (U - 1) / 2;
  localparam int unsigned NMF = 2 * B / U;

  typedef enum logic [2:0] {S_IDLE, S_GRAM, S_CAP, S_INTF, S_LCAP, S_WAIT} pstate_e;
  pstate_e            ps;
  logic [7:0]         pcnt;       // cycle within Gram / interference
  logic               mf_run;
  logic [7:0]         mcnt;       // cycle within MF
  logic               mf_fin;     // accumulators hold a finished y^MF
  logic               clr;
  logic [7:0]         acnt;
  logic               pre_pend;   // pre_start seen, Gram not yet begun

  // PE array wiring
  logic    [NS-1:0]   en, split;
  cplx_op_t [NS-1:0]  a, b;
  logic signed [NS-1:0][ACCW-1:0] acc_re, acc_im;
  logic signed [U-1:0][ACCW-1:0]  mf_re, mf_im;

  // G upper triangle and lambda registers
  cplx_g_t [NP-1:0]               gu_q;
  logic signed [U-1:0][GW-1:0]    gd_q;
  logic signed [U-1:0][ACCW-1:0]  lam_q;

  logic sinr_start, sinr_done, sort_valid, inv_done;
  logic [U-1:0][ISW-1:0] sorted_keys_unused;
  logic [U-1:0][$clog2(U)-1:0] nu_s;

  // ------------------------------------------------------------- control
  // the array is free in IDLE/WAIT; an MF may also begin in the cycle in
  // which lambda is captured (its first products overwrite the accumulators at
  // that same edge), so preprocessing occupies the array for B+U cycles.
  assign mf_ready = (((ps == S_IDLE || ps == S_WAIT) && !pre_pend) ||
                     (ps == S_INTF && pcnt == 8'(U - 2)) || ps == S_LCAP) &&
                    (!mf_run || mcnt == 8'(NMF - 1));

  always_comb begin
    pe_mode = PE_IDLE;
    acnt    = pcnt;
    clr     = 1'b0;
    if (ps == S_GRAM)      begin pe_mode = PE_GRAM; clr = (pcnt == 0); end
    else if (ps == S_INTF) begin pe_mode = PE_INTF; clr = (pcnt == 0); end
    else if (mf_run)       begin pe_mode = PE_MF;   clr = (mcnt == 0); acnt = mcnt; end
  end

  assign h_rd_base  = (pe_mode == PE_MF) ? ($clog2(B))'(int'(mcnt) * int'(U / 2)) : ($clog2(B))'(pcnt);
  assign y_rd_chunk = ($clog2(NMF))'(mcnt);
  assign y_pop      = mf_run && (mcnt == 8'(NMF - 1));
  assign g_cap      = (ps == S_CAP) && !eq_busy;
  assign sinr_start = g_cap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps <= S_IDLE; pcnt <= '0; mf_run <= 1'b0; mcnt <= '0; mf_fin <= 1'b0;
      pre_busy <= 1'b0; pre_pend <= 1'b0;
    end else begin
      if (pre_start) begin pre_pend <= 1'b1; pre_busy <= 1'b1; end
      // coherence-block preprocessing
      unique case (ps)
        S_IDLE, S_WAIT: begin
          if (ps == S_WAIT && inv_done) pre_busy <= 1'b0;
          if ((pre_start || pre_pend) && !mf_run && !(ps == S_WAIT && !inv_done)) begin
            ps <= S_GRAM; pcnt <= '0; pre_pend <= 1'b0; pre_busy <= 1'b1;
          end else if (ps == S_WAIT && inv_done) ps <= S_IDLE;
        end
        S_GRAM: begin
          pcnt <= pcnt + 1'b1;
          if (pcnt == 8'(B - 1)) ps <= S_CAP;
        end
        S_CAP:  if (!eq_busy) begin ps <= S_INTF; pcnt <= '0; end
        S_INTF: begin
          pcnt <= pcnt + 1'b1;
          if (pcnt == 8'(U - 2)) ps <= S_LCAP;
        end
        S_LCAP: ps <= S_WAIT;
        default: ps <= S_IDLE;
      endcase
      // matched filtering, one vector per NMF cycles
      mf_fin <= mf_run && (mcnt == 8'(NMF - 1));
      if (mf_start && mf_ready) begin
        mf_run <= 1'b1; mcnt <= '0;
      end else if (mf_run) begin
        mcnt <= mcnt + 1'b1;
        if (mcnt == 8'(NMF - 1)) mf_run <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------- datapath
  pe_arbiter #(.U(U)) u_arb (
    .mode(pe_mode), .cnt(acnt), .h_rows, .y_chunk, .g, .en, .split, .a, .b);

  pe_array #(.U(U), .AW(ACCW)) u_pea (
    .clk, .rst_n, .clr, .en, .split, .a, .b, .acc_re, .acc_im,
    .mf_sum_re(mf_re), .mf_sum_im(mf_im));

  function automatic logic signed [GW-1:0] to_g(input logic signed [ACCW-1:0] x);
    return GW'(sat_s(64'(x) >>> 10, GW));
  endfunction
  function automatic logic signed [RW-1:0] to_r(input logic signed [ACCW-1:0] x);
    return RW'(sat_s(64'(x) >>> 8, RW));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gu_q <= '0; gd_q <= '0; lam_q <= '0; ymf <= '0; ymf_valid <= 1'b0;
    end else begin
      if (g_cap) begin
        for (int p = 0; p < int'(NP); p++) gu_q[p] <= '{re: to_g(acc_re[p]), im: to_g(acc_im[p])};
        for (int d = 0; d < int'(U / 2); d++) begin
          gd_q[2*d]   <= to_g(acc_re[NP+d]);
          gd_q[2*d+1] <= to_g(acc_im[NP+d]);
        end
      end
      if (ps == S_LCAP)
        for (int d = 0; d < int'(U / 2); d++) begin
          lam_q[2*d]   <= acc_re[NP+d];
          lam_q[2*d+1] <= acc_im[NP+d];
        end
      ymf_valid <= mf_fin;
      if (mf_fin)
        for (int i = 0; i < int'(U); i++) ymf[i] <= '{re: to_r(mf_re[i]), im: to_r(mf_im[i])};
    end
  end

  // full Hermitian G from the stored upper triangle
  always_comb begin
    int p;
    p = 0;
    for (int i = 0; i < int'(U); i++) begin
      g[i][i].re = gd_q[i];
      g[i][i].im = '0;
      for (int j = i + 1; j < int'(U); j++) begin
        g[i][j]    = gu_q[p];
        g[j][i].re = gu_q[p].re;
        g[j][i].im = GW'(-gu_q[p].im);
        p++;
      end
    end
  end

  // ------------------------------------------------------------- SINR, sort, inverse
  logic signed [U-1:0][GW-1:0] gdiag;
  assign gdiag = gd_q;

  sinr_module #(.U(U)) u_sinr (
    .clk, .rst_n, .start(sinr_start), .gdiag, .lambda(lam_q), .n0, .isinr, .done(sinr_done));

  bitonic_sorter #(.N(U), .KW(ISW)) u_sort (
    .clk, .rst_n, .in_valid(sinr_done), .keys(isinr), .out_valid(sort_valid), .nu(nu_s),
    .sorted_keys(sorted_keys_unused));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nu <= '0;
    else if (sort_valid) nu <= nu_s;
  end

  matrix_inverse #(.U(U)) u_inv (
    .clk, .rst_n, .start(sort_valid), .nu, .g, .k, .k_count, .done(inv_done));

  // a receive vector must not be matched-filtered while G is being formed
  assert property (@(posedge clk) disable iff (!rst_n) !(mf_run && (ps == S_GRAM || ps == S_INTF)));
endmodule
