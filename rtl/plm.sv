// plm -- piecewise linear mapping module: y = slope[bin(x)] * x + bias[bin(x)].
//
// A range identifier compares the input with the NBIN-1 ascending bin
// boundaries held in its LUT (entry 0's boundary is unused: bin 0 starts at
// minus infinity) and returns bin = number of boundaries <= x. The bin index
// addresses the slope LUT and the bias LUT; one multiplier and one adder form
// the affine map, saturated to OW bits. With suitable tables the same circuit
// is the BOX denoiser (clip to the constellation box, 3 bins), the trained
// piecewise-linear PME denoiser (2 sqrt(Q)-1 bins) or one bit's max-log LLR
// function. Unused high boundaries are set to the largest code so they never
// count. LANES inputs share one set of tables.
// Tables are written one row per cycle through the init port (from "par").
// Formats: x has IFRAC fraction bits, boundaries the same, slopes SLOPE_FRAC,
// biases and y OFRAC. Combinational from x to y.
// Range identifier, slope/bias LUTs, multiplier and adder follow the published
// PLM; the thermometer-count range identifier and the formats are this
// design's choice.
module plm
  import gbcd_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned NB    = NBIN,
  parameter int unsigned IW    = VW,
  parameter int unsigned IFRAC = Z_FRAC,
  parameter int unsigned OW    = ZW,
  parameter int unsigned OFRAC = Z_FRAC
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          init_we,
  input  logic [$clog2(NB)-1:0]         init_idx,
  input  plm_ent_t                      init_ent,
  input  logic signed [LANES-1:0][IW-1:0] x,
  output logic signed [LANES-1:0][OW-1:0] y
);
  localparam int unsigned SH = IFRAC + SLOPE_FRAC - OFRAC;

  plm_ent_t [NB-1:0] tab;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tab <= '0;
    else if (init_we) tab[init_idx] <= init_ent;
  end

  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    logic [$clog2(NB)-1:0] bin;
    always_comb begin
      logic signed [63:0] acc;
      // range identifier
      bin = '0;
      for (int k = 1; k < int'(NB); k++)
        if (64'($signed(x[l])) >= 64'(tab[k].bnd)) bin = bin + 1'b1;
      // affine map
      acc  = ((64'($signed(x[l])) * 64'(tab[bin].slope)) >>> SH) + 64'(tab[bin].bias);
      y[l] = OW'(sat_s(acc, OW));
    end
  end
endmodule
