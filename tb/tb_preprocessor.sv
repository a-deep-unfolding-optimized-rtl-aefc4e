// tb_preprocessor -- self-checking testbench of the preprocessor at full
// size (B = 128, U = 16). The testbench models the H store and the receive
// FIFO around it and checks:
//   * G = H^H H bit for bit after capture, and that capture waits while the
//     equaliser reports busy (g_cap only with eq_busy low),
//   * B = 128 Gram cycles, U-1 = 15 interference cycles, 2B/U = 16 cycles per
//     matched filter, back-to-back matched filters, y_MF = H^H y bit for bit,
//   * SINR^-1 keys against lambda/G^2 + N0/G (real arithmetic), the order nu
//     ascending in those keys, and each K_m against the exact 2x2 inverse.
// Watchdog.
module tb_preprocessor;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int B = B_ANT, U = U_UE, NV = 4;
  logic clk = 0, rst_n = 0, pre_start = 0, pre_busy, g_cap, eq_busy = 0, mf_start, mf_ready, y_pop, ymf_valid;
  logic [N0W-1:0] n0;
  logic [$clog2(B)-1:0] h_rd_base;
  cplx_h_t [U/2-1:0][U-1:0] h_rows;
  logic [$clog2(2*B/U)-1:0] y_rd_chunk;
  cplx_h_t [U/2-1:0] y_chunk;
  cplx_g_t [U-1:0][U-1:0] g;
  cplx_r_t [U-1:0] ymf;
  logic [U-1:0][$clog2(U)-1:0] nu;
  kmat_t [U/2-1:0] k;
  logic [$clog2(U/2+1)-1:0] k_count;
  logic [U-1:0][ISW-1:0] isinr;
  pe_mode_e pe_mode;
  int hr [B][U], hi [B][U], yr [NV][B], yi [NV][B];
  int pushed = 0, popped = 0, nymf = 0, cyc = 0, wait_cyc = 0;
  always #5 clk = ~clk;
  preprocessor dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog: pre_busy %0d nymf %0d popped %0d k_count %0d", pre_busy, nymf, popped, k_count); report(); $finish; end

  always_comb begin
    for (int r = 0; r < U / 2; r++)
      for (int u = 0; u < U; u++)
        h_rows[r][u] = '{re: 12'(hr[(int'(h_rd_base) + r) % B][u]), im: 12'(hi[(int'(h_rd_base) + r) % B][u])};
    for (int j = 0; j < U / 2; j++) begin
      int v;
      v = (popped < NV) ? popped : 0;
      y_chunk[j] = '{re: 12'(yr[v][int'(y_rd_chunk) * U / 2 + j]), im: 12'(yi[v][int'(y_rd_chunk) * U / 2 + j])};
    end
    mf_start = (pe_mode == PE_MF) ? (pushed - popped >= 2) : (pushed - popped >= 1);
  end

  int run_len = 0, last_ymf = 0;
  pe_mode_e prev = PE_IDLE;
  always @(posedge clk) if (rst_n && y_pop) popped <= popped + 1;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (pe_mode != prev) begin
      if (prev == PE_GRAM) chk(run_len == B, $sformatf("Gram %0d cycles", run_len));
      if (prev == PE_INTF) chk(run_len == U - 1, $sformatf("interference %0d cycles", run_len));
      if (prev == PE_MF) chk(run_len % (2 * B / U) == 0, $sformatf("MF %0d cycles", run_len));
      run_len = 0;
    end
    run_len++;
    prev = pe_mode;
    if (g_cap) chk(!eq_busy, "G captured while equaliser busy");
    if (eq_busy && dut.ps == dut.S_CAP) wait_cyc++;

    if (ymf_valid) begin
      for (int u = 0; u < U; u++) begin
        longint ar, ai;
        ar = 0; ai = 0;
        for (int b = 0; b < B; b++) begin
          ar += longint'(hr[b][u]) * yr[nymf][b] + longint'(hi[b][u]) * yi[nymf][b];
          ai += longint'(hr[b][u]) * yi[nymf][b] - longint'(hi[b][u]) * yr[nymf][b];
        end
        chk((ar >>> 8) == longint'($signed(ymf[u].re)) && (ai >>> 8) == longint'($signed(ymf[u].im)), "y_MF");
      end
      if (nymf > 0) chk(cyc - last_ymf == 2 * B / U, $sformatf("vector interval %0d", cyc - last_ymf));
      last_ymf = cyc;
      nymf++;
    end
  end

  initial begin
    n0 = 16'd200;
    for (int b = 0; b < B; b++) for (int u = 0; u < U; u++) begin
      hr[b][u] = $urandom_range(0, 512) - 256; hi[b][u] = $urandom_range(0, 512) - 256;
    end
    for (int v = 0; v < NV; v++) for (int b = 0; b < B; b++) begin
      yr[v][b] = $urandom_range(0, 2000) - 1000; yi[v][b] = $urandom_range(0, 2000) - 1000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    pre_start = 1; eq_busy = 1;
    @(negedge clk);
    pre_start = 0;
    pushed = NV;                       // all vectors wait in the modelled FIFO
    while (pe_mode == PE_GRAM || !g_cap && cyc < 140) @(negedge clk);
    repeat (20) @(negedge clk);
    eq_busy = 0;
    @(posedge clk); #1;                // capture edge (g_cap was high)
    // G
    for (int i = 0; i < U; i++) for (int j = 0; j < U; j++) begin
      longint ar, ai, er, ei;
      ar = 0; ai = 0;
      for (int b = 0; b < B; b++) begin
        ar += longint'(hr[b][i]) * hr[b][j] + longint'(hi[b][i]) * hi[b][j];
        ai += longint'(hr[b][i]) * hi[b][j] - longint'(hi[b][i]) * hr[b][j];
      end
      er = ar >>> 10;
      ei = (i > j) ? -((-ai) >>> 10) : ai >>> 10;
      @(posedge clk); #1;
      chk(er == longint'($signed(g[i][j].re)) && ei == longint'($signed(g[i][j].im)), $sformatf("G[%0d][%0d]", i, j));
    end
    while (pre_busy) @(negedge clk);
    while (nymf < NV) @(negedge clk);
    chk(wait_cyc > 0, "capture never waited");
    chk(k_count == 4'(U / 2), "all K_m");
    // SINR keys, order, inverses
    for (int u = 0; u < U; u++) begin
      real gu, lam, e, got;
      gu = real'($signed(g[u][u].re)) / 4096.0;
      lam = 0.0;
      for (int j = 0; j < U; j++) if (j != u)
        lam += (real'($signed(g[u][j].re)) ** 2 + real'($signed(g[u][j].im)) ** 2) / 16777216.0;
      e = lam / (gu * gu) + (real'(n0) / 65536.0) / gu;
      got = real'(isinr[u]) / 4096.0;
      chk(got - e < 0.03 * e + 0.002 && e - got < 0.03 * e + 0.002, $sformatf("key %0d %f vs %f", u, got, e));
    end
    for (int i = 1; i < U; i++) chk(isinr[nu[i-1]] <= isinr[nu[i]], "order");
    for (int m = 0; m < U / 2; m++) begin
      real a, c, br, bi, det, tol;
      a = real'($signed(g[nu[2*m]][nu[2*m]].re)) / 4096.0;
      c = real'($signed(g[nu[2*m+1]][nu[2*m+1]].re)) / 4096.0;
      br = real'($signed(g[nu[2*m]][nu[2*m+1]].re)) / 4096.0;
      bi = real'($signed(g[nu[2*m]][nu[2*m+1]].im)) / 4096.0;
      det = a * c - br * br - bi * bi;
      tol = 0.02 / det + 0.001;
      chk((real'($signed(k[m].k11)) / 4096.0 - c / det) < tol && (c / det - real'($signed(k[m].k11)) / 4096.0) < tol &&
          (real'($signed(k[m].k12.im)) / 4096.0 + bi / det) < tol && (-bi / det - real'($signed(k[m].k12.im)) / 4096.0) < tol,
          $sformatf("K_%0d", m));
    end
    report();
    $finish;
  end
endmodule
