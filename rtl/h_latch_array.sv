// h_latch_array -- storage of the channel matrix H (B rows x U columns).
//
// Written one row (the U complex entries of one antenna) per cycle. The read
// port returns RD_ROWS = U/2 consecutive rows starting at rd_base (wrapping at
// B), which is what the PE array consumes in matched-filter mode (eight rows per
// cycle for U = 16); the Gram mode uses the first of them.
// Timing: write takes effect at the clock edge; read is combinational.
// The published design keeps H in a latch array for its flexible access. This
// model uses edge-triggered storage (no reset: H is written before it is read),
// which behaves the same at the port level; the write port format is this
// design's own.
module h_latch_array
  import gbcd_pkg::*;
#(
  parameter int unsigned B       = B_ANT,
  parameter int unsigned U       = U_UE,
  parameter int unsigned RD_ROWS = U / 2
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(B)-1:0]     wr_row,
  input  cplx_h_t [U-1:0]          wr_data,
  input  logic [$clog2(B)-1:0]     rd_base,
  output cplx_h_t [RD_ROWS-1:0][U-1:0] rd_data
);
  cplx_h_t [U-1:0] mem [B];

  always_ff @(posedge clk) begin
    if (we) mem[wr_row] <= wr_data;
  end

  always_comb begin
    for (int r = 0; r < int'(RD_ROWS); r++)
      rd_data[r] = mem[(int'(rd_base) + r) % B];
  end
endmodule
