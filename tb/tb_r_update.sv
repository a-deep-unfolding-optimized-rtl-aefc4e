// tb_r_update -- self-checking testbench of the residual update
// r_out = r_in - G_{:,a1} dz_1 - G_{:,a2} dz_2, checked against real
// arithmetic within 2 LSB, and saturation of large results. Watchdog.
module tb_r_update;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE;
  logic clk = 0;
  cplx_r_t [U-1:0] r_in, r_out;
  cplx_g_t [U-1:0] g_a1, g_a2;
  cplx_dz_t [1:0] dz;
  always #5 clk = ~clk;
  r_update dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      for (int u = 0; u < U; u++) begin
        r_in[u].re = 18'($signed(16'($urandom))); r_in[u].im = 18'($signed(16'($urandom)));
        g_a1[u].re = 15'($signed(13'($urandom))); g_a1[u].im = 15'($signed(13'($urandom)));
        g_a2[u].re = 15'($signed(13'($urandom))); g_a2[u].im = 15'($signed(13'($urandom)));
      end
      for (int i = 0; i < 2; i++) begin dz[i].re = 12'($urandom); dz[i].im = 12'($urandom); end
      #1;
      for (int u = 0; u < U; u++) begin
        real er, ei, d1r, d1i, d2r, d2i;
        d1r = real'($signed(dz[0].re)) / 256.0; d1i = real'($signed(dz[0].im)) / 256.0;
        d2r = real'($signed(dz[1].re)) / 256.0; d2i = real'($signed(dz[1].im)) / 256.0;
        er = real'($signed(r_in[u].re)) / 16384.0
           - (real'($signed(g_a1[u].re)) * d1r - real'($signed(g_a1[u].im)) * d1i) / 4096.0
           - (real'($signed(g_a2[u].re)) * d2r - real'($signed(g_a2[u].im)) * d2i) / 4096.0;
        ei = real'($signed(r_in[u].im)) / 16384.0
           - (real'($signed(g_a1[u].re)) * d1i + real'($signed(g_a1[u].im)) * d1r) / 4096.0
           - (real'($signed(g_a2[u].re)) * d2i + real'($signed(g_a2[u].im)) * d2r) / 4096.0;
        er = (er > 8.0 - 1.0 / 16384) ? 8.0 - 1.0 / 16384 : (er < -8.0) ? -8.0 : er;
        ei = (ei > 8.0 - 1.0 / 16384) ? 8.0 - 1.0 / 16384 : (ei < -8.0) ? -8.0 : ei;
        chk((real'($signed(r_out[u].re)) / 16384.0 - er) * 16384 <= 2.0 && (er - real'($signed(r_out[u].re)) / 16384.0) * 16384 <= 2.0 &&
            (real'($signed(r_out[u].im)) / 16384.0 - ei) * 16384 <= 2.0 && (ei - real'($signed(r_out[u].im)) / 16384.0) * 16384 <= 2.0,
            $sformatf("r_out[%0d] %0d ref %f", u, $signed(r_out[u].re), er * 16384));
      end
    end
    report();
    $finish;
  end
endmodule
