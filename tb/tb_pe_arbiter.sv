// tb_pe_arbiter -- self-checking testbench of the PE operand selection for
// the Gram, matched-filter and interference modes with random operands.
// Watchdog.
module tb_pe_arbiter;
  import gbcd_pkg::*;
  import gbcd_tb_pkg::*;
  localparam int U = U_UE, NS = U * U / 2, NP = U * (U - 1) / 2;
  logic clk = 0;
  pe_mode_e mode;
  logic [7:0] cnt;
  cplx_h_t [U/2-1:0][U-1:0] h_rows;
  cplx_h_t [U/2-1:0] y_chunk;
  cplx_g_t [U-1:0][U-1:0] g;
  logic [NS-1:0] en, split;
  cplx_op_t [NS-1:0] a, b;
  always #5 clk = ~clk;
  pe_arbiter dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; report(); $finish; end
  function automatic bit eqh(cplx_op_t o, cplx_h_t h);
    return $signed(o.re) == $signed(h.re) && $signed(o.im) == $signed(h.im);
  endfunction
  function automatic bit eqg(cplx_op_t o, cplx_g_t h);
    return $signed(o.re) == $signed(h.re) && $signed(o.im) == $signed(h.im);
  endfunction
  initial begin
    for (int n = 0; n < 400; n++) begin
      int p;
      @(negedge clk);
      mode = pe_mode_e'(n % 4);
      cnt = 8'($urandom_range(0, U - 2));
      for (int r = 0; r < U / 2; r++) for (int u = 0; u < U; u++) h_rows[r][u] = '{re: 12'($urandom), im: 12'($urandom)};
      for (int r = 0; r < U / 2; r++) y_chunk[r] = '{re: 12'($urandom), im: 12'($urandom)};
      for (int i = 0; i < U; i++) for (int j = 0; j < U; j++) g[i][j] = '{re: 15'($urandom), im: 15'($urandom)};
      #1;
      case (mode)
        PE_IDLE: chk(en == '0, "idle enables");
        PE_GRAM: begin
          p = 0;
          for (int i = 0; i < U; i++) for (int j = i + 1; j < U; j++) begin
            chk(en[p] && !split[p] && eqh(a[p], h_rows[0][i]) && eqh(b[p], h_rows[0][j]), "Gram pair");
            p++;
          end
          for (int d = 0; d < U / 2; d++)
            chk(en[NP+d] && split[NP+d] && eqh(a[NP+d], h_rows[0][2*d]) && eqh(b[NP+d], h_rows[0][2*d+1]), "Gram diagonal");
        end
        PE_MF: begin
          for (int i = 0; i < U; i++) for (int j = 0; j < U / 2; j++)
            chk(en[i*U/2+j] && !split[i*U/2+j] && eqh(a[i*U/2+j], h_rows[j][i]) && eqh(b[i*U/2+j], y_chunk[j]), "MF slot");
        end
        PE_INTF: begin
          chk(en[NP-1:0] == '0, "interference uses only the diagonal PEs");
          for (int d = 0; d < U / 2; d++) begin
            int c0, c1;
            c0 = (cnt < 2 * d) ? cnt : cnt + 1;
            c1 = (cnt < 2 * d + 1) ? cnt : cnt + 1;
            chk(en[NP+d] && split[NP+d] && eqg(a[NP+d], g[2*d][c0]) && eqg(b[NP+d], g[2*d+1][c1]), "interference slot");
          end
        end
      endcase
    end
    report();
    $finish;
  end
endmodule
