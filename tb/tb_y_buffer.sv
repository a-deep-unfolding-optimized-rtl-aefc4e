// tb_y_buffer -- self-checking testbench of the receive-vector FIFO. Random
// pushes and pops; every chunk of the head vector, empty, two and in_ready are
// compared with a queue model. Watchdog.
module tb_y_buffer;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int B = B_ANT, U = U_UE;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, pop = 0, empty, two;
  cplx_h_t [B-1:0] in_data;
  logic [$clog2(2*B/U)-1:0] rd_chunk;
  cplx_h_t [U/2-1:0] rd_data;
  cplx_h_t [B-1:0] q [$];
  always #5 clk = ~clk;
  y_buffer dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  initial begin
    rd_chunk = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0) && two == (q.size() >= 2) && in_ready == (q.size() < 2), "flags");
      if (q.size() > 0) begin
        rd_chunk = 4'($urandom);
        #1;
        for (int j = 0; j < U / 2; j++)
          chk(rd_data[j] == q[0][int'(rd_chunk) * U / 2 + j], "chunk data");
      end
      in_valid = $urandom_range(0, 1);
      for (int b = 0; b < B; b++) in_data[b] = '{re: 12'($urandom), im: 12'($urandom)};
      pop = (q.size() > 0) && ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (in_valid && q.size() + (pop ? 1 : 0) < 2 + (pop ? 1 : 0) && in_ready) q.push_back(in_data);
    end
    @(negedge clk); in_valid = 0; pop = 0;
    report();
    $finish;
  end
endmodule
