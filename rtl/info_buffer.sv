// info_buffer -- holds the system information of the current coherence block
// and encodes it into the parameter-LUT address.
//
// At load the info word (modulation order, line-of-sight flag, receive SNR in
// dB and N0/Es) is captured and kept for the whole block. The scenario address
// is {qam[1:0], los, snr_class[2:0]}, where snr_class = 0 below 0 dB (the BOX
// denoiser entry) and 1 + floor(SNR/4 dB), capped at 7, from 0 dB upward, so
// 24 dB and above share the last trained set.
// Timing: outputs registered, valid the cycle after load.
// That modulation order, SNR and channel condition form the LUT address follows
// the published design; the field layout, the 4 dB SNR classes and the use of
// BOX below 0 dB as a separate entry are this design's choice (the published
// design trains from 0 dB to 25 dB and falls back to BOX below 0 dB).
module info_buffer
  import gbcd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  info_t              info_in,
  output info_t              info,
  output logic [SCEN_W-1:0]  scen
);
  function automatic logic [2:0] snr_class(input logic signed [6:0] snr);
    if (snr < 0)  return 3'd0;
    if (snr >= 24) return 3'd7;
    return 3'(1 + (snr >>> 2));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      info <= '0;
      scen <= '0;
    end else if (load) begin
      info <= info_in;
      scen <= {info_in.qam, info_in.los, snr_class(info_in.snr_db)};
    end
  end
endmodule
