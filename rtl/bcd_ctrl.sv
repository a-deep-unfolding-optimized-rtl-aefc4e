// bcd_ctrl -- controller of a BCD module.
//
// A start pulse begins one outer iteration in the same cycle: U cycles follow
// (start cycle included), two per inner iteration m = 0..U/2-1, phase 0 for
// the z-update and phase 1 for the r-update. The current pair is
// A_m = {nu[2m], nu[2m+1]} of the SINR-sorted user list. first marks m = 0,
// when the module reads the previous module's memories; done pulses in the
// cycle after the last one, which is when the next module may start.
// Counting m and forming A_m from nu follows the published controller; the
// same-cycle start and the done pulse are this design's handshake.
module bcd_ctrl
  import gbcd_pkg::*;
#(
  parameter int unsigned U = U_UE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [U-1:0][$clog2(U)-1:0]   nu,
  output logic                          active,
  output logic [$clog2(U/2)-1:0]        m,
  output logic                          phase,
  output logic                          first,
  output logic [$clog2(U)-1:0]          a1,
  output logic [$clog2(U)-1:0]          a2,
  output logic                          done
);
  localparam int unsigned CW = $clog2(U);
  logic          busy;
  logic [CW-1:0] cnt, cyc;

  assign active = start || busy;
  assign cyc    = start ? '0 : cnt;
  assign m      = cyc[CW-1:1];
  assign phase  = cyc[0];
  assign first  = (m == '0);
  assign a1     = nu[2*m];
  assign a2     = nu[2*m+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; done <= 1'b0;
    end else begin
      done <= active && (cyc == CW'(U - 1));
      if (start) begin
        busy <= 1'b1; cnt <= CW'(1);
      end else if (busy) begin
        cnt <= cnt + 1'b1;
        if (cnt == CW'(U - 1)) busy <= 1'b0;
      end
    end
  end

  // a new outer iteration may only begin when the previous one has ended
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
