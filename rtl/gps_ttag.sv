// gps_ttag: GPS time tagger for backplane triggers.
//
// Every backplane trigger fires a laser diode whose light reaches a
// photodiode and discriminator next to a GPS receiver. This block keeps GPS
// time as whole seconds (counted on the PPS edges) plus nanoseconds since the
// last PPS (advanced NS_PER_CLK per clock, cleared by PPS), and latches both
// on the rising edge of each discriminated pulse.
//
// Interface: pps and pulse are synchronous inputs; tag_valid pulses for one
// cycle with tag_sec/tag_ns. Timing: the tag is the time of the clock edge
// at which the rising edge of pulse was first seen, output one cycle later.
// Latching a GPS time on each pulse is from the camera description; the
// PPS-plus-counter time base is this design's choice, with a resolution of
// one clock period rather than the few ns the real system reaches.
module gps_ttag #(
  parameter int unsigned NS_PER_CLK = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  input  logic        pulse,
  output logic        tag_valid,
  output logic [31:0] tag_sec,
  output logic [29:0] tag_ns,
  output logic [31:0] n_tags
);
  logic        pps_q, pulse_q;
  logic [31:0] sec;
  logic [29:0] ns;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pps_q <= 1'b0; pulse_q <= 1'b0;
      sec <= '0; ns <= '0;
      tag_valid <= 1'b0; tag_sec <= '0; tag_ns <= '0; n_tags <= '0;
    end else begin
      pps_q   <= pps;
      pulse_q <= pulse;
      if (pps && !pps_q) begin
        sec <= sec + 1;
        ns  <= '0;
      end else begin
        ns  <= ns + 30'(NS_PER_CLK);
      end
      tag_valid <= 1'b0;
      if (pulse && !pulse_q) begin
        tag_valid <= 1'b1;
        tag_sec   <= sec;
        tag_ns    <= ns;
        n_tags    <= n_tags + 1;
      end
    end
  end
endmodule
