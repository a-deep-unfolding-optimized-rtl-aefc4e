// tb_llr_module -- self-checking testbench of the LLR unit. Per-bit h_b
// tables for each QAM order and alpha, 1/alpha are streamed in as "par";
// random estimates and Gram diagonals then go in, and every LLR must match
// (G/alpha) h_b(s_hat (1 + alpha/G)) from the exact real-valued h_b within
// quantisation tolerance; unused bits must be zero, users must come out in
// order in U = 16 consecutive cycles starting two cycles after start.
// Watchdog.
module tb_llr_module;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE;
  logic clk = 0, rst_n = 0, start = 0, busy, llr_valid;
  par_t par;
  logic [1:0] qam;
  cplx_v_t [U-1:0] s_hat;
  logic signed [U-1:0][GW-1:0] gdiag;
  logic [$clog2(U)-1:0] llr_ue;
  logic signed [2*NLLRB-1:0][LLRW-1:0] llr;
  always #5 clk = ~clk;
  llr_module dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    par = '0; s_hat = '0; gdiag = '0; qam = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < 4; q++) begin
      tab_t tb [NLLRB];
      real alpha;
      alpha = (q + 1) * 0.01;
      for (int b = 0; b < NLLRB; b++) tb[b] = (b <= q) ? llr_tab(q, b) : empty_tab();
      qam = 2'(q);
      for (int i = 0; i < int'(NBIN); i++) begin
        @(negedge clk);
        par.valid = 1; par.idx = 5'(i);
        for (int b = 0; b < NLLRB; b++) par.ent[K_ITER + b] = tb[b][i];
        par.alpha = 16'(rnd(alpha * 65536)); par.inv_alpha = 16'(rnd(16.0 / alpha));
      end
      @(negedge clk); par.valid = 0;
      for (int n = 0; n < 20; n++) begin
        real sr [U], si [U], gg [U];
        int lat;
        for (int u = 0; u < U; u++) begin
          gg[u] = real'($urandom_range(2048, 8192)) / 4096.0;
          gdiag[u] = 15'(rnd(gg[u] * 4096));
          gg[u] = real'(rnd(gg[u] * 4096)) / 4096.0;
          sr[u] = real'(int'($urandom_range(0, 2400)) - 1200) / 1000.0;
          si[u] = real'(int'($urandom_range(0, 2400)) - 1200) / 1000.0;
          s_hat[u] = '{re: 14'(rnd(sr[u] * 256)), im: 14'(rnd(si[u] * 256))};
          sr[u] = real'(rnd(sr[u] * 256)) / 256.0; si[u] = real'(rnd(si[u] * 256)) / 256.0;
        end
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        lat = 1;
        while (!llr_valid && lat < 10) begin @(negedge clk); lat++; end
        chk(lat == 2, $sformatf("first LLR %0d cycles after start", lat));
        for (int u = 0; u < U; u++) begin
          real sc;
          chk(llr_valid && llr_ue == 4'(u), $sformatf("user %0d order", u));
          sc = 1.0 + (real'(par.alpha) / 65536.0) / gg[u];
          for (int b = 0; b < NLLRB; b++) begin
            if (b <= q) begin
              real er, ei, gr_, gi_;
              er = gg[u] / (real'(par.alpha) / 65536.0) * h_exact(q, b, sr[u] * sc);
              ei = gg[u] / (real'(par.alpha) / 65536.0) * h_exact(q, b, si[u] * sc);
              gr_ = real'($signed(llr[b])) / 16.0; gi_ = real'($signed(llr[NLLRB + b])) / 16.0;
              er = (er > 8191.9) ? 8191.9 : (er < -8192.0) ? -8192.0 : er;
              ei = (ei > 8191.9) ? 8191.9 : (ei < -8192.0) ? -8192.0 : ei;
              chk((gr_ - er) <= 0.05 * (er < 0 ? -er : er) + 3.0 && (er - gr_) <= 0.05 * (er < 0 ? -er : er) + 3.0,
                  $sformatf("q %0d u %0d b %0d re %f ref %f", q, u, b, gr_, er));
              chk((gi_ - ei) <= 0.05 * (ei < 0 ? -ei : ei) + 3.0 && (ei - gi_) <= 0.05 * (ei < 0 ? -ei : ei) + 3.0,
                  $sformatf("q %0d u %0d b %0d im %f ref %f", q, u, b, gi_, ei));
            end else chk(llr[b] == '0 && llr[NLLRB + b] == '0, "unused bit");
          end
          @(negedge clk);
        end
        chk(!llr_valid, "valid after last user");
      end
    end
    report();
    $finish;
  end
endmodule
