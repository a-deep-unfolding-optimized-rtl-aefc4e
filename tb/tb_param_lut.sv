// tb_param_lut -- self-checking testbench of the parameter LUT. Random tables
// and scalars are written for several scenarios; each start must stream the
// chosen scenario's NBIN rows, one per cycle with idx 0..NBIN-1, starting the
// cycle after start, with busy high for exactly NBIN cycles. Watchdog.
module tb_param_lut;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, cfg_scal_we = 0, start = 0, busy;
  logic [SCEN_W-1:0] cfg_scen, scen;
  logic [$clog2(NTAB)-1:0] cfg_tab;
  logic [$clog2(NBIN)-1:0] cfg_idx;
  plm_ent_t cfg_ent;
  logic [PW-1:0] cfg_alpha, cfg_inv_alpha;
  par_t par;
  plm_ent_t model [int][NTAB][NBIN];
  logic [PW-1:0] m_alpha [int], m_ialpha [int];
  always #5 clk = ~clk;
  param_lut dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    int sc [5] = '{0, 63, 21, 37, 8};
    cfg_scen = '0; cfg_tab = '0; cfg_idx = '0; cfg_ent = '0; cfg_alpha = '0; cfg_inv_alpha = '0; scen = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sc[s]) begin
      for (int t = 0; t < int'(NTAB); t++)
        for (int i = 0; i < int'(NBIN); i++) begin
          @(negedge clk);
          cfg_we = 1; cfg_scen = 6'(sc[s]); cfg_tab = 3'(t); cfg_idx = 5'(i);
          cfg_ent = plm_ent_t'({$urandom, $urandom});
          model[sc[s]][t][i] = cfg_ent;
        end
      @(negedge clk);
      cfg_we = 0; cfg_scal_we = 1; cfg_alpha = 16'($urandom); cfg_inv_alpha = 16'($urandom);
      m_alpha[sc[s]] = cfg_alpha; m_ialpha[sc[s]] = cfg_inv_alpha;
    end
    @(negedge clk); cfg_scal_we = 0;
    for (int r = 0; r < 10; r++) begin
      int s, nb;
      s = sc[$urandom_range(0, 4)];
      @(negedge clk); start = 1; scen = 6'(s);
      @(negedge clk); start = 0; scen = 6'($urandom);
      nb = 0;
      for (int i = 0; i < int'(NBIN); i++) begin
        if (busy) nb++;
        @(negedge clk);
        chk(par.valid && par.idx == 5'(i), $sformatf("row %0d valid/idx", i));
        for (int t = 0; t < int'(NTAB); t++) chk(par.ent[t] == model[s][t][i], "table entry");
        chk(par.alpha == m_alpha[s] && par.inv_alpha == m_ialpha[s], "scalars");
      end
      chk(nb == NBIN && !busy, $sformatf("busy for %0d cycles", nb));
      @(negedge clk);
      chk(!par.valid, "valid after last row");
    end
    report();
    $finish;
  end
endmodule
