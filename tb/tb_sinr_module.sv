// tb_sinr_module -- self-checking testbench of the SINR^-1 unit. Random Gram
// diagonals, interference sums lambda and noise levels; each key must match
// lambda/G^2 + N0/G (computed here in real arithmetic) within the accuracy of
// the reciprocal table, and done must come exactly U+1 = 17 cycles after
// start, the paper's SINR latency. Watchdog.
module tb_sinr_module;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic signed [U-1:0][GW-1:0] gdiag;
  logic signed [U-1:0][ACCW-1:0] lambda;
  logic [N0W-1:0] n0;
  logic [U-1:0][ISW-1:0] isinr;
  always #5 clk = ~clk;
  sinr_module dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    gdiag = '0; lambda = '0; n0 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int lat;
      @(negedge clk);
      for (int u = 0; u < U; u++) begin
        gdiag[u] = GW'($urandom_range(1500, 12000));                      // 0.37 .. 2.9
        lambda[u] = ACCW'(longint'($urandom_range(0, 1 << 20)) * 16);     // 0 .. 1.0
      end
      n0 = 16'($urandom_range(0, 20000));
      start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 40) begin @(negedge clk); lat++; end
      chk(lat - 1 == U + 1, $sformatf("SINR latency %0d", lat - 1));
      for (int u = 0; u < U; u++) begin
        real g, e, got;
        g = real'(gdiag[u]) / 4096.0;
        e = (real'(lambda[u]) / 16777216.0) / (g * g) + (real'(n0) / 65536.0) / g;
        got = real'(isinr[u]) / 4096.0;
        chk(got - e < 0.02 * e + 0.002 && e - got < 0.02 * e + 0.002, $sformatf("key %0d: %f vs %f", u, got, e));
      end
    end
    report();
    $finish;
  end
endmodule
