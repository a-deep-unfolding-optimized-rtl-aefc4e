// tb_h_latch_array -- self-checking testbench of the channel-matrix store.
// Writes random rows, overwrites some, then reads U/2 rows from random bases
// (including wrap-around) and compares with a copy kept here. Watchdog.
module tb_h_latch_array;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int B = B_ANT, U = U_UE;
  logic clk = 0, we = 0;
  logic [$clog2(B)-1:0] wr_row, rd_base;
  cplx_h_t [U-1:0] wr_data;
  cplx_h_t [U/2-1:0][U-1:0] rd_data;
  cplx_h_t [U-1:0] model [B];
  always #5 clk = ~clk;
  h_latch_array dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    rd_base = '0; wr_row = '0; wr_data = '0;
    for (int n = 0; n < 3 * B; n++) begin
      @(negedge clk);
      we = 1;
      wr_row = (n < B) ? 7'(n) : 7'($urandom);
      for (int u = 0; u < U; u++) wr_data[u] = '{re: 12'($urandom), im: 12'($urandom)};
      model[wr_row] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      rd_base = 7'($urandom);
      #1;
      for (int r = 0; r < U / 2; r++)
        chk(rd_data[r] == model[(int'(rd_base) + r) % B], $sformatf("row %0d base %0d", r, rd_base));
    end
    report();
    $finish;
  end
endmodule
