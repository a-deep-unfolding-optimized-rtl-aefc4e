// param_lut -- parameter look-up table holding the piecewise-linear tables of
// every scenario, and the "par" stream that initialises the PLM LUTs.
//
// Per scenario it holds NTAB tables of NBIN rows {bin boundary, slope, bias}:
// tables 0..K-1 for the denoisers of the K BCD modules (BOX or trained PME),
// tables K..K+3 for the per-bit max-log LLR functions, and the two scalars
// alpha and 1/alpha of the LLR circuit. The contents are computed offline from
// the trained (rho, beta, alpha) and written by the host through the cfg port.
// On start the table of scenario scen is streamed out: row idx of all tables
// at once, one row per cycle for NBIN cycles, with the scalars alongside.
// Timing: par is registered; busy is high while streaming.
// The table-of-tables organisation follows the published design; the host
// write port, the number of scenarios (2^SCEN_W = 64) and the row-per-cycle
// stream are this design's choice.
module param_lut
  import gbcd_pkg::*;
#(
  parameter int unsigned NSCEN = 2**SCEN_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host configuration
  input  logic                      cfg_we,
  input  logic [SCEN_W-1:0]         cfg_scen,
  input  logic [$clog2(NTAB)-1:0]   cfg_tab,
  input  logic [$clog2(NBIN)-1:0]   cfg_idx,
  input  plm_ent_t                  cfg_ent,
  input  logic                      cfg_scal_we,
  input  logic [PW-1:0]             cfg_alpha,
  input  logic [PW-1:0]             cfg_inv_alpha,
  // stream
  input  logic                      start,
  input  logic [SCEN_W-1:0]         scen,
  output logic                      busy,
  output par_t                      par
);
  plm_ent_t [NTAB-1:0] mem  [NSCEN][NBIN];
  logic [2*PW-1:0]     scal [NSCEN];

  logic [SCEN_W-1:0]        cur;
  logic [$clog2(NBIN)-1:0]  idx;

  always_ff @(posedge clk) begin
    if (cfg_we)      mem[cfg_scen][cfg_idx][cfg_tab] <= cfg_ent;
    if (cfg_scal_we) scal[cfg_scen] <= {cfg_alpha, cfg_inv_alpha};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; cur <= '0; par <= '0;
    end else begin
      par.valid <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; idx <= '0; cur <= scen;
      end else if (busy) begin
        par.valid     <= 1'b1;
        par.idx       <= idx;
        par.ent       <= mem[cur][idx];
        par.alpha     <= scal[cur][2*PW-1:PW];
        par.inv_alpha <= scal[cur][PW-1:0];
        idx <= idx + 1'b1;
        if (idx == ($clog2(NBIN))'(NBIN - 1)) busy <= 1'b0;
      end
    end
  end
endmodule
