// gbcd_top -- GBCD soft-output data detector core for a B = 128 antenna base
// station and U = 16 users (QPSK to 256-QAM, BOX or trained PME denoiser,
// K = 3 iterations).
//
// Blocks: input memories (H array, Y buffer, info buffer), the preprocessor
// (reconfigurable PE array with its arbiter, SINR module, bitonic sorter, 2x2
// inverse unit, parameter LUT) and the BCD equalizer (three BCD modules and
// the LLR module).
// Use, per coherence block:
//   1. (once) write the parameter LUT through cfg_* ;
//   2. wait for mf_idle (no receive vector of the previous block left before
//      matched filtering), write H row by row (h_we), then pulse pre_start with
//      info_in (modulation, LoS flag, SNR, N0/Es) valid in that cycle;
//   3. offer receive vectors on y_valid/y_ready, one whole vector per beat.
// Timing: the PE array is busy B+U = 144 cycles with Gram matrix and
// interference terms, then takes a new vector every 2B/U = 16 cycles; each
// vector leaves as U cycles of llr_valid, one user per cycle, about 4 x 16
// cycles (matched filter and three BCD iterations) plus a few register stages
// after its matched filtering began. T vectors thus occupy the PE array for
// 16T + 144 cycles. A matched filter is requested whenever the Y buffer holds
// a vector; while one runs, only when a second vector waits behind it, so
// that filters run back to back without reading a vector twice.
// The block structure and cycle counts follow the published design; the
// host-side ports and handshakes are this design's own.
module gbcd_top
  import gbcd_pkg::*;
#(
  parameter int unsigned B = B_ANT,
  parameter int unsigned U = U_UE
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // parameter LUT configuration
  input  logic                        cfg_we,
  input  logic [SCEN_W-1:0]           cfg_scen,
  input  logic [$clog2(NTAB)-1:0]     cfg_tab,
  input  logic [$clog2(NBIN)-1:0]     cfg_idx,
  input  plm_ent_t                    cfg_ent,
  input  logic                        cfg_scal_we,
  input  logic [PW-1:0]               cfg_alpha,
  input  logic [PW-1:0]               cfg_inv_alpha,
  // channel matrix and coherence-block start
  input  logic                        h_we,
  input  logic [$clog2(B)-1:0]        h_row,
  input  cplx_h_t [U-1:0]             h_data,
  input  logic                        pre_start,
  input  info_t                       info_in,
  output logic                        pre_busy,
  // receive vectors
  input  logic                        y_valid,
  output logic                        y_ready,
  input  cplx_h_t [B-1:0]             y_data,
  output logic                        mf_idle,
  // soft outputs
  output logic                        llr_valid,
  output logic [$clog2(U)-1:0]        llr_ue,
  output logic signed [2*NLLRB-1:0][LLRW-1:0] llr,
  // observation
  output pe_mode_e                    pe_mode,
  output logic [K_ITER-1:0]           bcd_busy
);
  info_t                       info;
  logic [SCEN_W-1:0]           scen;
  par_t                        par;
  logic                        lut_busy;

  logic [$clog2(B)-1:0]        h_rd_base;
  cplx_h_t [U/2-1:0][U-1:0]    h_rows;
  logic [$clog2(2*B/U)-1:0]    y_rd_chunk;
  cplx_h_t [U/2-1:0]           y_chunk;
  logic                        y_pop, y_empty, y_two;

  logic                        g_cap, eq_busy, mf_ready;
  cplx_g_t [U-1:0][U-1:0]      g;
  cplx_r_t [U-1:0]             ymf;
  logic                        ymf_valid;
  logic [U-1:0][$clog2(U)-1:0] nu;
  kmat_t [U/2-1:0]             k;
  logic [$clog2(U/2+1)-1:0]    k_count;
  logic [U-1:0][ISW-1:0]       isinr;

  // ---------------- input memories
  h_latch_array #(.B(B), .U(U)) u_harr (
    .clk, .we(h_we), .wr_row(h_row), .wr_data(h_data), .rd_base(h_rd_base), .rd_data(h_rows));

  y_buffer #(.B(B), .U(U)) u_ybuf (
    .clk, .rst_n, .in_valid(y_valid), .in_ready(y_ready), .in_data(y_data),
    .rd_chunk(y_rd_chunk), .rd_data(y_chunk), .pop(y_pop), .empty(y_empty), .two(y_two));

  info_buffer u_info (.clk, .rst_n, .load(pre_start), .info_in, .info, .scen);

  // ---------------- preprocessor
  param_lut u_plut (
    .clk, .rst_n, .cfg_we, .cfg_scen, .cfg_tab, .cfg_idx, .cfg_ent,
    .cfg_scal_we, .cfg_alpha, .cfg_inv_alpha,
    .start(g_cap), .scen, .busy(lut_busy), .par);

  preprocessor #(.B(B), .U(U)) u_pre (
    .clk, .rst_n, .pre_start, .pre_busy, .g_cap, .eq_busy,
    .mf_start((pe_mode == PE_MF) ? y_two : !y_empty), .mf_ready, .n0(info.n0),
    .h_rd_base, .h_rows, .y_rd_chunk, .y_chunk, .y_pop,
    .g, .ymf, .ymf_valid, .nu, .k, .k_count, .isinr, .pe_mode);

  assign mf_idle = y_empty && (pe_mode != PE_MF);

  // ---------------- BCD equalizer
  bcd_equalizer #(.U(U), .K(K_ITER)) u_eq (
    .clk, .rst_n, .par, .qam(info.qam), .ymf_valid, .ymf, .g, .nu, .k, .k_count,
    .busy(eq_busy), .stage_busy(bcd_busy), .llr_valid, .llr_ue, .llr);

  // H must not change under a running matched filter or Gram computation
  assert property (@(posedge clk) disable iff (!rst_n) h_we |-> (pe_mode == PE_IDLE));
  // the PLM tables must be complete before the first vector of the block
  assert property (@(posedge clk) disable iff (!rst_n) ymf_valid |-> !lut_busy);
endmodule
