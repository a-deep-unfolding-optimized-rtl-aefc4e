// tb_bcd_ctrl -- self-checking testbench of the BCD sequencer: after start the
// U = 16 cycles must step through block m = 0..U/2-1 with phase 0/1, give the
// pair (nu[2m], nu[2m+1]), flag the first block, and pulse done right after
// the 16th cycle (U cycles per BCD iteration as in the paper). Back-to-back
// starts are also tested. Watchdog.
module tb_bcd_ctrl;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE;
  logic clk = 0, rst_n = 0, start = 0, active, phase, first, done;
  logic [U-1:0][$clog2(U)-1:0] nu;
  logic [$clog2(U/2)-1:0] m;
  logic [$clog2(U)-1:0] a1, a2;
  always #5 clk = ~clk;
  bcd_ctrl dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    nu = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      int gap;
      gap = (n % 2) ? 0 : $urandom_range(1, 5);
      @(negedge clk);
      for (int i = 0; i < U; i++) nu[i] = 4'($urandom);
      start = 1;
      for (int c = 0; c < U; c++) begin
        #1;
        chk(active && int'(m) == c / 2 && phase == c[0] && first == (c / 2 == 0), $sformatf("cycle %0d state", c));
        chk(a1 == nu[2*(c/2)] && a2 == nu[2*(c/2)+1], "pair");
        chk(!done || c == 0, "done early");
        @(negedge clk); start = 0;
      end
      chk(done, "done after U cycles");
      repeat (gap) begin chk(!active, "idle"); @(negedge clk); end
    end
    report();
    $finish;
  end
endmodule
