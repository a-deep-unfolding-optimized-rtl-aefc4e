// tb_pe_b -- self-checking testbench of pe_b. Complex mode must accumulate
// conj(a)*b; split mode must accumulate |a|^2 on the real output and |b|^2 on
// the imaginary output. References are formed in the testbench. Watchdog.
module tb_pe_b;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0, split = 0;
  logic signed [OPW-1:0] a_re, a_im, b_re, b_im;
  logic signed [ACCW-1:0] acc_re, acc_im;
  longint rr, ri;
  always #5 clk = ~clk;
  pe_b dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    a_re = 0; a_im = 0; b_re = 0; b_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 300; run++) begin
      int len;
      len = 1 + $urandom_range(0, 128);
      split = run[0];
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        en = 1; clr = (c == 0);
        a_re = OPW'($urandom); a_im = OPW'($urandom);
        b_re = OPW'($urandom); b_im = OPW'($urandom);
        if (clr) begin rr = 0; ri = 0; end
        if (split) begin
          rr += longint'(a_re) * a_re + longint'(a_im) * a_im;
          ri += longint'(b_re) * b_re + longint'(b_im) * b_im;
        end else begin
          rr += longint'(a_re) * b_re + longint'(a_im) * b_im;
          ri += longint'(a_re) * b_im - longint'(a_im) * b_re;
        end
      end
      @(negedge clk); en = 0;
      chk(longint'(acc_re) == rr && longint'(acc_im) == ri,
          $sformatf("split=%0d re %0d/%0d im %0d/%0d", split, acc_re, rr, acc_im, ri));
    end
    report();
    $finish;
  end
endmodule
