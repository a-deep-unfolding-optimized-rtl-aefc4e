// tb_bcd_equalizer -- self-checking testbench of the K = 3 BCD chain with the
// LLR unit. G and the exact K_m come from a random channel; noiseless y_MF =
// G s vectors (QPSK and 16-QAM, BOX and PME tables) enter every U = 16 cycles,
// the rate of the published design. Checks: the LLR signs equal the sent
// Gray bits, every vector yields U consecutive LLR cycles, one vector leaves
// every 16 cycles, each stage is busy 16 cycles per vector, and the stages
// work on different vectors at the same time (pipelining). Watchdog.
module tb_bcd_equalizer;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE, B = 128, NV = 5;
  logic clk = 0, rst_n = 0, ymf_valid = 0, busy, llr_valid;
  par_t par;
  logic [1:0] qam;
  cplx_r_t [U-1:0] ymf;
  cplx_g_t [U-1:0][U-1:0] g;
  logic [U-1:0][$clog2(U)-1:0] nu;
  kmat_t [U/2-1:0] k;
  logic [$clog2(U/2+1)-1:0] k_count;
  logic [K_ITER-1:0] stage_busy;
  logic [$clog2(U)-1:0] llr_ue;
  logic signed [2*NLLRB-1:0][LLRW-1:0] llr;
  real gr [U][U], gi [U][U];
  int sr [NV][U], si [NV][U];
  int nvec = 0, nu_out = 0, overlap = 0, last_first = 0, cyc = 0, cur_q;
  int sbusy [K_ITER];
  always #5 clk = ~clk;
  bcd_equalizer dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; report(); $finish; end

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if ($countones(stage_busy) >= 2) overlap++;
    for (int s = 0; s < K_ITER; s++) if (stage_busy[s]) sbusy[s]++;
    if (llr_valid) begin
      chk(llr_ue == 4'(nu_out), "user order");
      if (nu_out == 0) begin
        if (nvec > 0) chk(cyc - last_first == U, $sformatf("output interval %0d", cyc - last_first));
        last_first = cyc;
      end
      for (int b = 0; b <= cur_q; b++) begin
        chk(($signed(llr[b]) > 0) == (gray_bit(cur_q, sr[nvec][nu_out], b) == 1), $sformatf("vec %0d user %0d bit %0d re", nvec, nu_out, b));
        chk(($signed(llr[NLLRB + b]) > 0) == (gray_bit(cur_q, si[nvec][nu_out], b) == 1), "im bit");
      end
      if (nu_out == U - 1) begin nu_out = 0; nvec++; end else nu_out++;
    end
  end

  initial begin
    ymf = '0; g = '0; nu = '0; k = '0; par = '0; qam = '0;
    k_count = 4'(U / 2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      real hr [B][U], hi [B][U];
      int perm [U];
      cur_q = mode % 2;
      qam = 2'(cur_q);
      // tables: BOX or PME for the three stages, h_b for the LLR bits
      for (int i = 0; i < int'(NBIN); i++) begin
        tab_t td, tl [NLLRB];
        td = (mode < 2) ? box_tab(cur_q) : pme_tab(cur_q, 2.0 / pam_d(cur_q), pam_d(cur_q));
        for (int b = 0; b < NLLRB; b++) tl[b] = (b <= cur_q) ? llr_tab(cur_q, b) : empty_tab();
        @(negedge clk);
        par.valid = 1; par.idx = 5'(i);
        for (int s = 0; s < K_ITER; s++) par.ent[s] = td[i];
        for (int b = 0; b < NLLRB; b++) par.ent[K_ITER + b] = tl[b][i];
        par.alpha = 16'(655); par.inv_alpha = 16'(1600);
      end
      @(negedge clk); par.valid = 0;
      for (int b = 0; b < B; b++) for (int u = 0; u < U; u++) begin
        hr[b][u] = real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0 * 0.1;
        hi[b][u] = real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0 * 0.1;
      end
      for (int i = 0; i < U; i++) for (int j = 0; j < U; j++) begin
        real ar, ai;
        ar = 0; ai = 0;
        for (int b = 0; b < B; b++) begin
          ar += hr[b][i] * hr[b][j] + hi[b][i] * hi[b][j];
          ai += hr[b][i] * hi[b][j] - hi[b][i] * hr[b][j];
        end
        g[i][j] = '{re: 15'(rnd(ar * 4096)), im: 15'(rnd(ai * 4096))};
        gr[i][j] = real'(rnd(ar * 4096)) / 4096.0; gi[i][j] = real'(rnd(ai * 4096)) / 4096.0;
      end
      for (int i = 0; i < U; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < U; i++) nu[i] = 4'(perm[i]);
      for (int m = 0; m < U / 2; m++) begin
        int a1, a2;
        real det;
        a1 = perm[2*m]; a2 = perm[2*m+1];
        det = gr[a1][a1] * gr[a2][a2] - gr[a1][a2] ** 2 - gi[a1][a2] ** 2;
        k[m].k11 = 16'(rnd(gr[a2][a2] / det * 4096)); k[m].k22 = 16'(rnd(gr[a1][a1] / det * 4096));
        k[m].k12.re = 16'(rnd(-gr[a1][a2] / det * 4096)); k[m].k12.im = 16'(rnd(-gi[a1][a2] / det * 4096));
      end
      nvec = 0; nu_out = 0;
      for (int v = 0; v < NV; v++) begin
        for (int u = 0; u < U; u++) begin
          sr[v][u] = $urandom_range(0, pam_m(cur_q) - 1); si[v][u] = $urandom_range(0, pam_m(cur_q) - 1);
        end
        for (int u = 0; u < U; u++) begin
          real ar, ai;
          ar = 0; ai = 0;
          for (int j = 0; j < U; j++) begin
            ar += gr[u][j] * pam_pt(cur_q, sr[v][j]) - gi[u][j] * pam_pt(cur_q, si[v][j]);
            ai += gr[u][j] * pam_pt(cur_q, si[v][j]) + gi[u][j] * pam_pt(cur_q, sr[v][j]);
          end
          ymf[u] = '{re: 18'(rnd(ar * 16384)), im: 18'(rnd(ai * 16384))};
        end
        ymf_valid = 1;
        @(negedge clk);
        ymf_valid = 0;
        repeat (U - 1) @(negedge clk);
      end
      while (nvec < NV) @(negedge clk);
      while (busy) @(negedge clk);
    end
    chk(overlap > 0, "stages never overlapped");
    for (int s = 0; s < K_ITER; s++) chk(sbusy[s] == 4 * NV * U, $sformatf("stage %0d busy %0d cycles", s, sbusy[s]));
    report();
    $finish;
  end
endmodule
