// bcd_equalizer -- the BCD equalizer: K = 3 BCD modules in a chain, one per
// outer iteration, followed by the LLR module.
//
// Each stage needs U = 16 cycles per vector and starts on the done pulse of
// the stage before (the first one on ymf_valid), reading that stage's memories
// in its first two cycles. With matched filtering also taking 16 cycles per
// vector, four receive vectors are in flight at once (MF, BCD 1..3) plus one in
// the LLR module, and one vector of soft outputs is completed every 16 cycles.
// par, streamed at the start of each coherence block, loads table k into the
// PLM of BCD module k and the bit tables into the LLR module.
// busy is high while any stage holds a vector; the preprocessor does not
// replace G while it is.
// The chain of identical modules and the pipeline interleaving follow the
// published design; the done-pulse handshake is this design's own.
module bcd_equalizer
  import gbcd_pkg::*;
#(
  parameter int unsigned U = U_UE,
  parameter int unsigned K = K_ITER
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  par_t                          par,
  input  logic [1:0]                    qam,
  input  logic                          ymf_valid,
  input  cplx_r_t [U-1:0]               ymf,
  input  cplx_g_t [U-1:0][U-1:0]        g,
  input  logic [U-1:0][$clog2(U)-1:0]   nu,
  input  kmat_t [U/2-1:0]               k,
  input  logic [$clog2(U/2+1)-1:0]      k_count,
  output logic                          busy,
  output logic [K-1:0]                  stage_busy,
  output logic                          llr_valid,
  output logic [$clog2(U)-1:0]          llr_ue,
  output logic signed [2*NLLRB-1:0][LLRW-1:0] llr
);
  cplx_z_t [K:0][U-1:0] zc;
  cplx_r_t [K:0][U-1:0] rc;
  cplx_v_t [K:0][U-1:0] vc;
  logic    [K:0]        st;
  logic                 llr_busy;
  logic signed [U-1:0][GW-1:0] gdiag;

  assign zc[0] = '0;       // z^(0) = 0
  assign rc[0] = ymf;      // r = y^MF
  assign vc[0] = '0;
  assign st[0] = ymf_valid;

  for (genvar i = 0; i < int'(K); i++) begin : g_bcd
    bcd_module #(.U(U)) u_bcd (
      .clk, .rst_n, .start(st[i]), .nu, .k, .k_count, .g,
      .z_in(zc[i]), .r_in(rc[i]),
      .init_we(par.valid), .init_idx(par.idx), .init_ent(par.ent[i]),
      .z_mem(zc[i+1]), .r_mem(rc[i+1]), .v_mem(vc[i+1]),
      .busy(stage_busy[i]), .done(st[i+1]));
  end

  always_comb
    for (int u = 0; u < int'(U); u++) gdiag[u] = g[u][u].re;

  llr_module #(.U(U)) u_llr (
    .clk, .rst_n, .par, .qam, .start(st[K]), .s_hat(vc[K]), .gdiag,
    .busy(llr_busy), .llr_valid, .llr_ue, .llr);

  assign busy = (|stage_busy) || llr_busy || (|st) || llr_valid;
endmodule
