// tb_pe_a -- self-checking testbench of pe_a (two-product accumulate).
// Random operand pairs are accumulated over random-length runs with en/clr
// and compared with a sum formed in the testbench. Watchdog: 20000 cycles.
module tb_pe_a;
  import gbcd_tb_pkg::*;
  localparam int OW = 15, AW = 36;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic signed [OW-1:0] x0, y0, x1, y1;
  logic signed [AW-1:0] acc;
  longint ref_acc;
  always #5 clk = ~clk;
  pe_a #(.OW(OW), .AW(AW)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  function automatic logic signed [OW-1:0] rv();
    return OW'($urandom);
  endfunction
  initial begin
    x0 = 0; y0 = 0; x1 = 0; y1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ref_acc = 0;
    for (int run = 0; run < 200; run++) begin
      int len;
      len = 1 + $urandom_range(0, 130);
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        en = ($urandom_range(0, 3) != 0);
        clr = (c == 0);
        x0 = rv(); y0 = rv(); x1 = rv(); y1 = rv();
        if (en) ref_acc = (clr ? 0 : ref_acc) + longint'(x0) * y0 + longint'(x1) * y1;
        else if (c == 0) ref_acc = ref_acc; // clr without en holds the sum
        @(posedge clk); #1;
        if (en) chk(longint'(acc) == ref_acc, $sformatf("acc %0d ref %0d", acc, ref_acc));
      end
      @(negedge clk); en = 0; clr = 0;
    end
    // clear on a single enabled cycle restarts the sum
    @(negedge clk); en = 1; clr = 1; x0 = 3; y0 = 4; x1 = -2; y1 = 5;
    @(posedge clk); #1 chk(acc == 2, "clear restart");
    @(negedge clk); en = 0;
    report();
    $finish;
  end
endmodule
