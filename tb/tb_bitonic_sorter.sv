// tb_bitonic_sorter -- self-checking testbench of the 16-input bitonic
// sorter. Random keys (with forced ties) go in back to back; each output
// must be the ascending order with ties by lower index, nu must be a
// permutation matching it, and out_valid must follow in_valid by exactly the
// 10 cycles the paper states for the sort. Watchdog.
module tb_bitonic_sorter;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int N = 16, KW = ISW, LAT = 10;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N-1:0][KW-1:0] keys, sorted_keys;
  logic [N-1:0][$clog2(N)-1:0] nu;
  logic [N-1:0][KW-1:0] q_keys [$];
  int q_time [$];
  int cyc = 0, nout = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  bitonic_sorter #(.N(N), .KW(KW)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; report(); $finish; end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [N-1:0][KW-1:0] k;
    bit used [N];
    k = q_keys.pop_front();
    begin int dt; dt = cyc - q_time.pop_front(); chk(dt == LAT, $sformatf("sort latency %0d", dt)); end
    foreach (used[i]) used[i] = 0;
    for (int i = 0; i < N; i++) begin
      chk(!used[nu[i]], "nu not a permutation");
      used[nu[i]] = 1;
      chk(sorted_keys[i] == k[nu[i]], "sorted key does not match nu");
      if (i > 0) chk(k[nu[i-1]] < k[nu[i]] || (k[nu[i-1]] == k[nu[i]] && nu[i-1] < nu[i]),
                     $sformatf("order at %0d", i));
    end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      for (int i = 0; i < N; i++)
        keys[i] = (t % 3 == 0) ? KW'($urandom_range(0, 3)) : KW'($urandom);
      if (in_valid) begin q_keys.push_back(keys); q_time.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    chk(q_keys.size() == 0 && nout > 100, "all vectors sorted");
    report();
    $finish;
  end
endmodule
