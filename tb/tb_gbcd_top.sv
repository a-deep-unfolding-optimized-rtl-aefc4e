// tb_gbcd_top -- end-to-end, full-size testbench of gbcd_top (B = 128,
// U = 16, K = 3, no parameter overrides).
//
// For several coherence blocks (every QAM order, BOX and PME denoiser tables,
// line-of-sight flag set and clear) the testbench loads the parameter LUT for
// the block's scenario, writes a random Rayleigh channel H, starts the
// preprocessing and streams receive vectors y = H s + n back to back. It then
// checks:
//   * the Gram matrix G = H^H H and every matched-filter output H^H y bit for
//     bit against sums formed here,
//   * the hard decisions of the LLRs against the transmitted Gray-coded bits
//     (bit-error-rate bound per QAM order),
//   * the cycle counts of the published schedule: B = 128 Gram cycles, U-1 =
//     15 interference cycles, B + U = 144 cycles of PE-array preprocessing,
//     2B/U = 16 matched-filter cycles per vector, one vector every 16 cycles
//     when vectors queue, and 16 consecutive LLR cycles per vector,
//   * with a 16 x 16 QPSK system (the size of the published error-rate
//     study; antennas 16..127 carry zero) that BCD still decides most bits,
//   * that each mechanism was exercised (a count of zero is a failure).
// Watchdog: 200000 cycles.
module tb_gbcd_top;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int B = B_ANT, U = U_UE, NV = 6, NBLK = 6;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_scal_we = 0;
  logic [SCEN_W-1:0] cfg_scen;
  logic [$clog2(NTAB)-1:0] cfg_tab;
  logic [$clog2(NBIN)-1:0] cfg_idx;
  plm_ent_t cfg_ent;
  logic [PW-1:0] cfg_alpha, cfg_inv_alpha;
  logic h_we = 0, pre_start = 0, pre_busy;
  logic [$clog2(B)-1:0] h_row;
  cplx_h_t [U-1:0] h_data;
  info_t info_in;
  logic y_valid = 0, y_ready, mf_idle, llr_valid;
  cplx_h_t [B-1:0] y_data;
  logic [$clog2(U)-1:0] llr_ue;
  logic signed [2*NLLRB-1:0][LLRW-1:0] llr;
  pe_mode_e pe_mode;
  logic [K_ITER-1:0] bcd_busy;

  always #5 clk = ~clk;
  gbcd_top dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); report(); $finish; end

  // ---------------------------------------------------------------- stimulus data
  int hr [B][U], hi [B][U];          // channel, 11 fraction bits
  int yr [NV][B], yi [NV][B];        // receive vectors
  int sr [NV][U], si [NV][U];        // transmitted PAM indices
  int cur_qam, cur_blk;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction
  function automatic int q12(real x);
    int v;
    v = rnd(x * 2048.0);
    return (v > 2047) ? 2047 : (v < -2048) ? -2048 : v;
  endfunction

  // ---------------------------------------------------------------- mechanism counters
  int n_gram, n_intf, n_mf, n_ymf, n_llr_vec, n_jit, n_overlap, n_box, n_pme, n_queue;
  int n_qam [4];
  int n_los [2];

  // schedule measurements
  int run_mode, run_len, pre_first, pre_last;
  pe_mode_e prev_mode = PE_IDLE;
  always @(negedge clk) if (rst_n) begin
    if (pe_mode == PE_GRAM) n_gram++;
    if (pe_mode == PE_INTF) n_intf++;
    if (pe_mode == PE_MF)   n_mf++;
    if (pe_mode == PE_GRAM && prev_mode != PE_GRAM) pre_first = cyc;
    if (pe_mode == PE_INTF) pre_last = cyc;
    if (pe_mode != prev_mode) begin
      if (prev_mode == PE_GRAM) chk(run_len == B, $sformatf("Gram run %0d", run_len));
      if (prev_mode == PE_INTF) begin
        chk(run_len == U - 1, $sformatf("interference run %0d", run_len));
        chk(pre_last - pre_first + 1 == B + U, $sformatf("preprocessing %0d cycles", pre_last - pre_first + 1));
      end
      if (prev_mode == PE_MF) chk(run_len % (2 * B / U) == 0, $sformatf("MF run %0d", run_len));
      run_len = 0;
    end
    run_len++;
    prev_mode = pe_mode;
    if (bcd_busy[0] && dut.k_count < 4'(U / 2)) n_jit++;
    if ($countones(bcd_busy) >= 2) n_overlap++;
    if (!dut.u_ybuf.empty && pe_mode == PE_MF) n_queue++;
  end

  // ---------------------------------------------------------------- G and y_MF checks
  int ymf_cnt = 0, last_ymf = 0;
  always @(negedge clk) if (rst_n && dut.ymf_valid) begin
    longint ar, ai, er, ei;
    int v;
    v = ymf_cnt;
    if (v == 0) begin
      for (int i = 0; i < U; i++)
        for (int j = 0; j < U; j++) begin
          ar = 0; ai = 0;
          for (int b = 0; b < B; b++) begin
            ar += longint'(hr[b][i]) * hr[b][j] + longint'(hi[b][i]) * hi[b][j];
            ai += longint'(hr[b][i]) * hi[b][j] - longint'(hi[b][i]) * hr[b][j];
          end
          er = ar >>> 10; ei = ai >>> 10;
          // the lower triangle is the conjugate of the stored upper one
          if (i > j) ei = -((-ai) >>> 10);
          chk(er == longint'($signed(dut.g[i][j].re)) && ei == longint'($signed(dut.g[i][j].im)),
              $sformatf("G[%0d][%0d] %0d,%0d ref %0d,%0d", i, j, $signed(dut.g[i][j].re), $signed(dut.g[i][j].im), er, ei));
        end
    end else if (v > 0) begin
      chk(cyc - last_ymf == 2 * B / U, $sformatf("vector interval %0d", cyc - last_ymf));
    end
    for (int u = 0; u < U; u++) begin
      ar = 0; ai = 0;
      for (int b = 0; b < B; b++) begin
        ar += longint'(hr[b][u]) * yr[v][b] + longint'(hi[b][u]) * yi[v][b];
        ai += longint'(hr[b][u]) * yi[v][b] - longint'(hi[b][u]) * yr[v][b];
      end
      er = ar >>> 8; ei = ai >>> 8;
      chk(er == longint'($signed(dut.ymf[u].re)) && ei == longint'($signed(dut.ymf[u].im)),
          $sformatf("yMF[%0d] vector %0d", u, v));
    end
    last_ymf = cyc;
    ymf_cnt++;
    n_ymf++;
  end

  // ---------------------------------------------------------------- LLR checks
  int llr_vec = 0, llr_u = 0, llr_last = -10;
  int bit_err [4], bit_tot [4];
  int cur_nant = B, err16 = 0, tot16 = 0;
  always @(negedge clk) if (rst_n && llr_valid) begin
    chk(llr_ue == 4'(llr_u), $sformatf("LLR user %0d expected %0d", llr_ue, llr_u));
    if (llr_u > 0) chk(cyc == llr_last + 1, "LLR cycles not consecutive");
    for (int b = 0; b <= cur_qam; b++) begin
      int br, bi;
      br = gray_bit(cur_qam, sr[llr_vec][llr_u], b);
      bi = gray_bit(cur_qam, si[llr_vec][llr_u], b);
      if (cur_nant < B) begin
        tot16 += 2;
        if (($signed(llr[b]) > 0) != (br == 1)) err16++;
        if (($signed(llr[NLLRB + b]) > 0) != (bi == 1)) err16++;
      end else begin
        bit_tot[cur_qam] += 2;
        if (($signed(llr[b]) > 0) != (br == 1)) bit_err[cur_qam]++;
        if (($signed(llr[NLLRB + b]) > 0) != (bi == 1)) bit_err[cur_qam]++;
      end
    end
    for (int b = cur_qam + 1; b < NLLRB; b++)
      chk(llr[b] == 0 && llr[NLLRB + b] == 0, "unused LLR bit not zero");
    llr_last = cyc;
    if (llr_u == U - 1) begin llr_u = 0; llr_vec++; n_llr_vec++; end
    else llr_u++;
  end

  // ---------------------------------------------------------------- host tasks
  task automatic cfg_tables(int scen, int qam, bit pme, real n0);
    tab_t t;
    real d;
    d = pam_d(qam);
    for (int tb = 0; tb < int'(NTAB); tb++) begin
      if (tb < K_ITER) t = pme ? pme_tab(qam, 2.0 / d, d) : box_tab(qam);
      else if (tb - K_ITER <= qam) t = llr_tab(qam, tb - K_ITER);
      else t = empty_tab();
      for (int i = 0; i < int'(NBIN); i++) begin
        @(negedge clk);
        cfg_we = 1; cfg_scen = SCEN_W'(scen); cfg_tab = 3'(tb); cfg_idx = 5'(i); cfg_ent = t[i];
      end
    end
    @(negedge clk);
    cfg_we = 0;
    cfg_scal_we = 1; cfg_scen = SCEN_W'(scen);
    cfg_alpha = PW'(rnd(n0 * 65536.0));
    cfg_inv_alpha = PW'(rnd(16.0 / n0));
    @(negedge clk);
    cfg_scal_we = 0;
  endtask

  function automatic int scen_of(int qam, bit los, int snr);
    int c;
    c = (snr < 0) ? 0 : (snr >= 24) ? 7 : 1 + snr / 4;
    return (qam << 4) | (int'(los) << 3) | c;
  endfunction

  task automatic run_block(int qam, bit los, int snr_db, int nant);
    real n0, sig, d;
    bit pme;
    pme = los;
    n0  = 10.0 ** (-real'(snr_db) / 10.0);
    d   = pam_d(qam);
    sig = $sqrt(1.0 / (2.0 * nant));
    cfg_tables(scen_of(qam, los, snr_db), qam, pme, n0);
    // wait for the previous block to drain
    while (!mf_idle || bcd_busy != 0 || llr_valid || dut.eq_busy) @(negedge clk);
    for (int b = 0; b < B; b++)
      for (int u = 0; u < U; u++) begin
        hr[b][u] = (b < nant) ? q12(gauss() * sig) : 0;
        hi[b][u] = (b < nant) ? q12(gauss() * sig) : 0;
      end
    for (int v = 0; v < NV; v++) begin
      for (int u = 0; u < U; u++) begin
        sr[v][u] = $urandom_range(0, pam_m(qam) - 1);
        si[v][u] = $urandom_range(0, pam_m(qam) - 1);
      end
      for (int b = 0; b < B; b++) begin
        real ar, ai;
        ar = gauss() * $sqrt(n0 / 2.0);
        ai = gauss() * $sqrt(n0 / 2.0);
        for (int u = 0; u < U; u++) begin
          real xr, xi;
          xr = pam_pt(qam, sr[v][u]); xi = pam_pt(qam, si[v][u]);
          ar += (hr[b][u] * xr - hi[b][u] * xi) / 2048.0;
          ai += (hr[b][u] * xi + hi[b][u] * xr) / 2048.0;
        end
        yr[v][b] = (b < nant) ? q12(ar) : 0;
        yi[v][b] = (b < nant) ? q12(ai) : 0;
      end
    end
    for (int b = 0; b < B; b++) begin
      @(negedge clk);
      h_we = 1; h_row = 7'(b);
      for (int u = 0; u < U; u++) h_data[u] = '{re: 12'(hr[b][u]), im: 12'(hi[b][u])};
    end
    @(negedge clk);
    h_we = 0;
    cur_qam = qam;
    cur_nant = nant;
    ymf_cnt = 0; llr_vec = 0; llr_u = 0;
    pre_start = 1;
    info_in = '{qam: 2'(qam), los: los, snr_db: 7'(snr_db), n0: 16'(rnd(n0 * 65536.0))};
    @(negedge clk);
    pre_start = 0;
    for (int v = 0; v < NV; v++) begin
      y_valid = 1;
      for (int b = 0; b < B; b++) y_data[b] = '{re: 12'(yr[v][b]), im: 12'(yi[v][b])};
      @(posedge clk);
      while (!y_ready) @(posedge clk);
      @(negedge clk);
    end
    y_valid = 0;
    while (llr_vec < NV) @(negedge clk);
    n_qam[qam]++; n_los[los]++;
    if (pme) n_pme++; else n_box++;
  endtask

  initial begin
    cfg_scen = '0; cfg_tab = '0; cfg_idx = '0; cfg_ent = '0; cfg_alpha = '0; cfg_inv_alpha = '0;
    h_row = '0; h_data = '0; info_in = '0; y_data = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    run_block(0, 0, 12, B);
    run_block(1, 1, 20, B);
    run_block(2, 0, 26, B);
    run_block(3, 1, 34, B);
    run_block(3, 0, 34, B);
    // the paper's 16 x 16 QPSK system: antennas 16..127 carry zero
    run_block(0, 0, 20, 16);
    repeat (20) @(negedge clk);
    for (int q = 0; q < 4; q++) begin
      real ber;
      ber = real'(bit_err[q]) / real'(bit_tot[q]);
      $display("QAM order %0d: %0d of %0d bits wrong", q, bit_err[q], bit_tot[q]);
      chk(bit_tot[q] > 0 && ber <= 0.02, $sformatf("BER %f for QAM order %0d", ber, q));
    end
    $display("16 x 16 QPSK: %0d of %0d bits wrong", err16, tot16);
    chk(tot16 > 0 && real'(err16) <= 0.1 * real'(tot16), "BER of the 16 x 16 QPSK system above 10%");
    $display("mechanisms: gram=%0d intf=%0d mf=%0d ymf=%0d llr_vectors=%0d early_bcd=%0d overlap=%0d queued_mf=%0d box=%0d pme=%0d los=%0d/%0d qam=%0d/%0d/%0d/%0d",
             n_gram, n_intf, n_mf, n_ymf, n_llr_vec, n_jit, n_overlap, n_queue, n_box, n_pme,
             n_los[0], n_los[1], n_qam[0], n_qam[1], n_qam[2], n_qam[3]);
    chk(n_gram > 0, "no Gram cycles");
    chk(n_intf > 0, "no interference cycles");
    chk(n_mf == NBLK * NV * 2 * B / U, $sformatf("MF cycles %0d", n_mf));
    chk(n_ymf == NBLK * NV, "matched-filter vectors");
    chk(n_llr_vec == NBLK * NV, "LLR vectors");
    chk(n_jit > 0, "BCD never started before all K_m were ready");
    chk(n_overlap > 0, "BCD stages never overlapped");
    chk(n_queue > 0, "no queued receive vector");
    chk(n_box > 0 && n_pme > 0, "BOX or PME tables unused");
    chk(n_los[0] > 0 && n_los[1] > 0, "LoS flag not exercised");
    for (int q = 0; q < 4; q++) chk(n_qam[q] > 0, "QAM order unused");
    report();
    $finish;
  end
endmodule
