// y_buffer -- register-array FIFO of receive vectors waiting for matched
// filtering.
//
// A whole receive vector (B complex entries) is accepted per beat with a
// valid/ready handshake. The head vector is read by the PE array in chunks of
// U/2 entries, y_{k*U/2 .. k*U/2+U/2-1} for chunk k, one chunk per cycle, and
// dropped with pop once matched filtering has read it.
// Timing: in_ready and empty are registered state; write and pop act at the
// clock edge; the chunk read is combinational. two is high when a second
// vector waits behind the head, so a new matched filter may start in the
// cycle the head is popped.
// That receive vectors are buffered in a register array follows the published
// design; the depth (two vectors) and the handshake are this design's choice.
module y_buffer
  import gbcd_pkg::*;
#(
  parameter int unsigned B     = B_ANT,
  parameter int unsigned U     = U_UE,
  parameter int unsigned DEPTH = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  cplx_h_t [B-1:0]              in_data,
  input  logic [$clog2(2*B/U)-1:0]     rd_chunk,
  output cplx_h_t [U/2-1:0]            rd_data,
  input  logic                         pop,
  output logic                         empty,
  output logic                         two     // at least two vectors held
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  cplx_h_t [B-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign in_ready = (cnt < (AW+1)'(DEPTH));
  assign empty    = (cnt == '0);
  assign two      = (cnt >= (AW+1)'(2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (in_valid && in_ready) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop && !empty)        rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(in_valid && in_ready) - (AW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp] <= in_data;
  end

  always_comb begin
    for (int j = 0; j < int'(U / 2); j++)
      rd_data[j] = mem[rp][int'(rd_chunk) * int'(U / 2) + j];
  end

  // popping an empty buffer is a protocol error of the controller
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
