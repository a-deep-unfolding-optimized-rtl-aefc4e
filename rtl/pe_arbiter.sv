// pe_arbiter -- routes H, y or G entries to the PE-B slots of the
// reconfigurable PE array according to the operation mode.
//
// The array has U^2/2 PE-B slots (U^2 PE-As). Slot numbering used here:
//   slots 0 .. U(U-1)/2-1      : the pairs (i,j), i<j, in row order
//   slots U(U-1)/2 .. U^2/2-1  : U/2 slots whose two PE-As work separately
//                                (split) on users 2d and 2d+1
// Modes (cnt is the cycle within the current operation):
//   PE_GRAM: one row k = cnt of H. Pair slot (i,j): a = H[k][i], b = H[k][j]
//            (complex MAC, gives G_ij); split slot d: |H[k][2d]|^2,
//            |H[k][2d+1]|^2 (gives G_uu). B cycles.
//   PE_MF  : rows cnt*U/2 .. cnt*U/2+U/2-1 of H and the same entries of y.
//            Slot i*U/2 + j (column i, row j): a = H[row j][i], b = y[row j].
//            2B/U cycles.
//   PE_INTF: split slots only; the PE-A of user u reads G[u][k] with
//            k = cnt (cnt < u) or cnt+1 (cnt >= u), so that after U-1 cycles
//            it holds lambda_u = sum_{k != u} |G_uk|^2. Other slots idle.
// Purely combinational. The modes and their PE counts (16 PE-As + 120 PE-Bs,
// 128 PE-Bs, 16 PE-As) follow the published design; the slot numbering is
// this design's own.
module pe_arbiter
  import gbcd_pkg::*;
#(
  parameter int unsigned U = U_UE
) (
  input  pe_mode_e                 mode,
  input  logic [7:0]               cnt,
  input  cplx_h_t [U/2-1:0][U-1:0] h_rows,
  input  cplx_h_t [U/2-1:0]        y_chunk,
  input  cplx_g_t [U-1:0][U-1:0]   g,
  output logic    [U*U/2-1:0]      en,
  output logic    [U*U/2-1:0]      split,
  output cplx_op_t [U*U/2-1:0]     a,
  output cplx_op_t [U*U/2-1:0]     b
);
  localparam int unsigned NS = U * U / 2;
  localparam int unsigned NP = U * (U - 1) / 2;
  typedef int unsigned pair_t [NP];

  function automatic pair_t pair_i();
    pair_t t; int p = 0;
    for (int i = 0; i < int'(U); i++) for (int j = i + 1; j < int'(U); j++) begin t[p] = i; p++; end
    return t;
  endfunction
  function automatic pair_t pair_j();
    pair_t t; int p = 0;
    for (int i = 0; i < int'(U); i++) for (int j = i + 1; j < int'(U); j++) begin t[p] = j; p++; end
    return t;
  endfunction
  localparam pair_t PI = pair_i();
  localparam pair_t PJ = pair_j();

  function automatic cplx_op_t ext_h(input cplx_h_t x);
    return '{re: OPW'(x.re), im: OPW'(x.im)};
  endfunction
  function automatic cplx_op_t ext_g(input cplx_g_t x);
    return '{re: OPW'(x.re), im: OPW'(x.im)};
  endfunction

  // column index of the interference term read by user u in cycle cnt
  function automatic int unsigned intf_col(input int unsigned u, input logic [7:0] c);
    return (int'(c) < int'(u)) ? int'(c) : int'(c) + 1;
  endfunction

  always_comb begin
    en    = '0;
    split = '0;
    a     = '0;
    b     = '0;
    unique case (mode)
      PE_GRAM: begin
        for (int p = 0; p < int'(NP); p++) begin
          en[p] = 1'b1;
          a[p]  = ext_h(h_rows[0][PI[p]]);
          b[p]  = ext_h(h_rows[0][PJ[p]]);
        end
        for (int d = 0; d < int'(U / 2); d++) begin
          en[NP+d]    = 1'b1;
          split[NP+d] = 1'b1;
          a[NP+d]     = ext_h(h_rows[0][2*d]);
          b[NP+d]     = ext_h(h_rows[0][2*d+1]);
        end
      end
      PE_MF: begin
        for (int i = 0; i < int'(U); i++)
          for (int j = 0; j < int'(U / 2); j++) begin
            en[i*(U/2)+j] = 1'b1;
            a[i*(U/2)+j]  = ext_h(h_rows[j][i]);
            b[i*(U/2)+j]  = ext_h(y_chunk[j]);
          end
      end
      PE_INTF: begin
        for (int d = 0; d < int'(U / 2); d++) begin
          en[NP+d]    = 1'b1;
          split[NP+d] = 1'b1;
          a[NP+d]     = ext_g(g[2*d][intf_col(2*d, cnt)]);
          b[NP+d]     = ext_g(g[2*d+1][intf_col(2*d+1, cnt)]);
        end
      end
      default: ;
    endcase
  end
endmodule
