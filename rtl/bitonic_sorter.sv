// bitonic_sorter -- pipelined bitonic sorting network that orders the users by
// ascending SINR^-1 (best user first) and outputs their indices nu.
//
// N = 2^n keys pass (1/2) n (n+1) compare-exchange layers (10 for N = 16); a
// register follows every layer, so the sorted list appears 10 cycles after
// in_valid and a new set may enter every cycle. Each element carries its user
// index; ties are broken by the lower index, so the result is deterministic.
// The network and its latency follow the published design; the tie rule is
// this design's choice.
module bitonic_sorter
  import gbcd_pkg::*;
#(
  parameter int unsigned N  = U_UE,
  parameter int unsigned KW = ISW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N-1:0][KW-1:0]          keys,
  output logic                          out_valid,
  output logic [N-1:0][$clog2(N)-1:0]   nu,
  output logic [N-1:0][KW-1:0]          sorted_keys
);
  localparam int unsigned LN = $clog2(N);
  localparam int unsigned NL = LN * (LN + 1) / 2;
  localparam int unsigned IW = LN;
  typedef int unsigned lay_t [NL];

  function automatic lay_t lay_k();
    lay_t t; int s = 0;
    for (int k = 2; k <= int'(N); k *= 2) for (int j = k / 2; j > 0; j /= 2) begin t[s] = k; s++; end
    return t;
  endfunction
  function automatic lay_t lay_j();
    lay_t t; int s = 0;
    for (int k = 2; k <= int'(N); k *= 2) for (int j = k / 2; j > 0; j /= 2) begin t[s] = j; s++; end
    return t;
  endfunction
  localparam lay_t LK = lay_k();
  localparam lay_t LJ = lay_j();

  typedef struct packed { logic [KW-1:0] key; logic [IW-1:0] idx; } elem_t;

  elem_t [N-1:0] st [NL+1];
  logic  [NL:0]  vld;

  always_comb begin
    for (int i = 0; i < int'(N); i++) st[0][i] = '{key: keys[i], idx: IW'(i)};
    vld[0] = in_valid;
  end

  for (genvar s = 0; s < int'(NL); s++) begin : g_layer
    elem_t [N-1:0] nxt;
    always_comb begin
      nxt = st[s];
      for (int i = 0; i < int'(N); i++) begin
        int l;
        l = i ^ int'(LJ[s]);
        if (l > i) begin
          logic up, gt;
          up = ((i & int'(LK[s])) == 0);
          gt = {st[s][i].key, st[s][i].idx} > {st[s][l].key, st[s][l].idx};
          if (gt == up) begin
            nxt[i] = st[s][l];
            nxt[l] = st[s][i];
          end
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st[s+1]  <= '0;
        vld[s+1] <= 1'b0;
      end else begin
        st[s+1]  <= nxt;
        vld[s+1] <= vld[s];
      end
    end
  end

  assign out_valid = vld[NL];
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      nu[i]          = st[NL][i].idx;
      sorted_keys[i] = st[NL][i].key;
    end
  end
endmodule
