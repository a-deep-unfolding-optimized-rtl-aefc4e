// tb_info_buffer -- self-checking testbench of the coherence-block
// information register and its scenario index {qam, LoS, SNR class}. Watchdog.
module tb_info_buffer;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  info_t info_in, info, exp_info;
  logic [SCEN_W-1:0] scen;
  always #5 clk = ~clk;
  info_buffer dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    info_in = '0; exp_info = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int snr, c;
      @(negedge clk);
      load = (n == 0) || $urandom_range(0, 1);
      info_in = info_t'($urandom);
      if (load) exp_info = info_in;
      @(negedge clk);
      load = 0;
      snr = int'($signed(exp_info.snr_db));
      c = (snr < 0) ? 0 : (snr >= 24) ? 7 : 1 + snr / 4;
      chk(info == exp_info, "info");
      chk(scen == SCEN_W'({exp_info.qam, exp_info.los, 3'(c)}), $sformatf("scen %0d snr %0d", scen, snr));
    end
    report();
    $finish;
  end
endmodule
