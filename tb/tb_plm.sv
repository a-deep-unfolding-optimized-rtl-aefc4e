// tb_plm -- self-checking testbench of the piecewise-linear map. It loads
// BOX and PME tables for every QAM order, drives random inputs on all lanes
// and compares each output with a bin search done in the testbench; it also
// checks the BOX map against clipping and the PME map against the real
// formula within a quantisation tolerance. Watchdog.
module tb_plm;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0, init_we = 0;
  logic [$clog2(NBIN)-1:0] init_idx;
  plm_ent_t init_ent;
  logic signed [LANES-1:0][VW-1:0] x;
  logic signed [LANES-1:0][ZW-1:0] y;
  tab_t t;
  always #5 clk = ~clk;
  plm #(.LANES(LANES)) dut (.*);
  initial begin repeat (200000) @(posedge clk); failures++; report(); $finish; end

  task automatic load(tab_t tt);
    for (int i = 0; i < int'(NBIN); i++) begin
      @(negedge clk); init_we = 1; init_idx = i[4:0]; init_ent = tt[i];
    end
    @(negedge clk); init_we = 0;
  endtask

  initial begin
    x = '0; init_idx = '0; init_ent = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 8; mode++) begin
      int qam;
      real amax, d;
      qam = mode % 4;
      d = pam_d(qam);
      amax = (pam_m(qam) - 1) * d;
      t = (mode < 4) ? box_tab(qam) : pme_tab(qam, 2.0 / d, d);
      load(t);
      for (int n = 0; n < 500; n++) begin
        @(negedge clk);
        for (int l = 0; l < LANES; l++)
          x[l] = (n % 2) ? VW'($urandom) : VW'($urandom_range(0, 1023) - 512);
        #1;
        for (int l = 0; l < LANES; l++) begin
          longint r;
          real xr, yr, e;
          r = plm_ref(t, longint'($signed(x[l])), Z_FRAC + SLOPE_FRAC - Z_FRAC, ZW);
          chk(longint'($signed(y[l])) == r, $sformatf("mode %0d x %0d y %0d ref %0d", mode, x[l], y[l], r));
          xr = real'($signed(x[l])) / 256.0;
          yr = real'($signed(y[l])) / 256.0;
          if (mode < 4) e = (xr > amax) ? amax : (xr < -amax) ? -amax : xr;
          else begin
            e = 0.0;
            for (int k = -(pam_m(qam) / 2 - 1); k <= pam_m(qam) / 2 - 1; k++) begin
              real a;
              a = (2.0 / d) * (xr + 2.0 * d * k);
              e += (a > 1.0) ? 1.0 : (a < -1.0) ? -1.0 : a;
            end
            e *= d;
          end
          chk((yr - e) < 0.03 && (e - yr) < 0.03, $sformatf("mode %0d real x %f y %f exp %f", mode, xr, yr, e));
        end
      end
    end
    report();
    $finish;
  end
endmodule
