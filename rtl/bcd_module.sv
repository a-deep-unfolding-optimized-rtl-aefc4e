// bcd_module -- one outer iteration of the Gram-domain block coordinate
// descent: U/2 inner iterations over the user pairs A_m of the sorted list,
// each a z-update followed by an r-update.
//
// Cycle 2m   (z-update): v = K_m r_A + z_A, z_new = PLM(v), dz = z_new - z_A;
//                        z_new is written to z-MEM, v to v-MEM, dz registered.
// Cycle 2m+1 (r-update): r <- r - G_{:,a1} dz_1 - G_{:,a2} dz_2 into r-MEM.
// One vector therefore takes U cycles (16). In the first inner iteration
// (m = 0) the module reads z and r from its inputs, which are the memories of
// the previous module (or z = 0 and r = y^MF for the first one), and loads
// the whole z input into z-MEM; that happens in the start cycle and the one
// after, before the previous module overwrites them. v-MEM keeps the last
// unconstrained estimate, which the last module hands on as s_hat.
// K_m must be valid when it is first used (k_count > m), which the
// preprocessor's schedule guarantees; an assertion checks it.
// Structure (CTRL, z-update, r-update, z-MEM, r-MEM, the m = 1 input muxes)
// follows the published BCD module; v-MEM and the handshake are this
// design's own.
module bcd_module
  import gbcd_pkg::*;
#(
  parameter int unsigned U = U_UE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [U-1:0][$clog2(U)-1:0]   nu,
  input  kmat_t [U/2-1:0]               k,
  input  logic [$clog2(U/2+1)-1:0]      k_count,
  input  cplx_g_t [U-1:0][U-1:0]        g,
  input  cplx_z_t [U-1:0]               z_in,
  input  cplx_r_t [U-1:0]               r_in,
  input  logic                          init_we,
  input  logic [$clog2(NBIN)-1:0]       init_idx,
  input  plm_ent_t                      init_ent,
  output cplx_z_t [U-1:0]               z_mem,
  output cplx_r_t [U-1:0]               r_mem,
  output cplx_v_t [U-1:0]               v_mem,
  output logic                          busy,
  output logic                          done
);
  logic                   active, phase, first;
  logic [$clog2(U/2)-1:0] m;
  logic [$clog2(U)-1:0]   a1, a2;

  cplx_r_t [U-1:0]  r_src, r_new;
  cplx_z_t [U-1:0]  z_src;
  cplx_r_t [1:0]    r_a;
  cplx_z_t [1:0]    z_old, z_new;
  cplx_v_t [1:0]    v;
  cplx_dz_t [1:0]   dz, dz_q;
  cplx_g_t [U-1:0]  g_a1, g_a2;

  bcd_ctrl #(.U(U)) u_ctrl (
    .clk, .rst_n, .start, .nu, .active, .m, .phase, .first, .a1, .a2, .done);

  assign busy  = active;
  assign r_src = first ? r_in : r_mem;
  assign z_src = first ? z_in : z_mem;
  assign r_a   = {r_src[a2], r_src[a1]};
  assign z_old = {z_src[a2], z_src[a1]};

  z_update u_zup (
    .clk, .rst_n, .init_we, .init_idx, .init_ent,
    .k(k[m]), .r_a, .z_old, .v, .z_new, .dz);

  always_comb begin
    for (int i = 0; i < int'(U); i++) begin
      g_a1[i] = g[i][a1];
      g_a2[i] = g[i][a2];
    end
  end

  r_update #(.U(U)) u_rup (.r_in(r_src), .g_a1, .g_a2, .dz(dz_q), .r_out(r_new));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_mem <= '0; r_mem <= '0; v_mem <= '0; dz_q <= '0;
    end else if (active) begin
      if (!phase) begin
        if (first) z_mem <= z_in;
        z_mem[a1] <= z_new[0];
        z_mem[a2] <= z_new[1];
        v_mem[a1] <= v[0];
        v_mem[a2] <= v[1];
        dz_q      <= dz;
      end else begin
        r_mem <= r_new;
      end
    end
  end

  // K_m is produced by the inverse unit just ahead of its first use
  assert property (@(posedge clk) disable iff (!rst_n)
                   (active && !phase) |-> (k_count > ($clog2(U/2+1))'(m)));
endmodule
