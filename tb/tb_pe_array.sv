// tb_pe_array -- self-checking testbench of the PE-B array: random operands,
// enables, split flags and clear; every accumulator and the matched-filter
// row sums are compared with a model kept here. Operands are 12-bit values
// (the H/y range) so that the row sums stay inside the accumulator. Watchdog.
module tb_pe_array;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE, NS = U * U / 2;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [NS-1:0] en, split;
  cplx_op_t [NS-1:0] a, b;
  logic signed [NS-1:0][ACCW-1:0] acc_re, acc_im;
  logic signed [U-1:0][ACCW-1:0] mf_sum_re, mf_sum_im;
  longint mr [NS], mi [NS];
  always #5 clk = ~clk;
  pe_array dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    en = '0; split = '0; a = '0; b = '0;
    foreach (mr[s]) begin mr[s] = 0; mi[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      clr = (n % 37 == 0);
      for (int s = 0; s < NS; s++) begin
        longint ar, ai, br, bi;
        en[s] = $urandom_range(0, 3) != 0;
        split[s] = (n / 37) % 2;
        a[s] = '{re: 15'($signed(12'($urandom))), im: 15'($signed(12'($urandom)))};
        b[s] = '{re: 15'($signed(12'($urandom))), im: 15'($signed(12'($urandom)))};
        ar = $signed(a[s].re); ai = $signed(a[s].im); br = $signed(b[s].re); bi = $signed(b[s].im);
        if (en[s]) begin
          if (clr) begin mr[s] = 0; mi[s] = 0; end
          if (split[s]) begin mr[s] += ar * ar + ai * ai; mi[s] += br * br + bi * bi; end
          else begin mr[s] += ar * br + ai * bi; mi[s] += ar * bi - ai * br; end
        end
      end
      @(posedge clk); #1;
      for (int s = 0; s < NS; s++)
        chk(longint'($signed(acc_re[s])) == mr[s] && longint'($signed(acc_im[s])) == mi[s], $sformatf("slot %0d", s));
      for (int i = 0; i < U; i++) begin
        longint sr, si;
        sr = 0; si = 0;
        for (int j = 0; j < U / 2; j++) begin sr += mr[i*U/2+j]; si += mi[i*U/2+j]; end
        chk(longint'($signed(mf_sum_re[i])) == sr && longint'($signed(mf_sum_im[i])) == si, "row sum");
      end
    end
    report();
    $finish;
  end
endmodule
