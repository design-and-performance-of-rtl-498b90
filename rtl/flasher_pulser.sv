// flasher_pulser: LED pulse former of the calibration flasher.
//
// A TTL trigger's rising edge must turn into one short, active-high pulse on
// the LEDs that are switched on. The circuit does this with a NOT gate, an
// AND gate and an RC delay: pulse = trig AND NOT(delayed trig), so the pulse
// lasts as long as the delay; a second AND gate applies it to each enabled
// LED. Here the RC delay (set by a potentiometer on the board) becomes a
// WIDTH-stage shift register, so the pulse is WIDTH clock cycles long.
//
// Interface: trig_in (synchronous to clk), led_en selects LEDs, led drives
// them. Timing: led rises one cycle after trig_in rises and stays high for
// WIDTH cycles, provided trig_in stays high that long.
// The gate structure follows the camera description's list of parts; the
// clocked delay line replacing the RC network is this design's choice.
module flasher_pulser #(
  parameter int unsigned N_LED = 10,
  parameter int unsigned WIDTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig_in,
  input  logic [N_LED-1:0] led_en,
  output logic [N_LED-1:0] led
);
  logic             trig_q;
  logic [WIDTH-1:0] dly;       // delayed copies of trig_q
  logic             pulse;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q <= 1'b0;
      dly    <= '0;
    end else begin
      trig_q <= trig_in;
      dly    <= {dly[WIDTH-2:0], trig_q};
    end
  end

  assign pulse = trig_q & ~dly[WIDTH-1];
  assign led   = led_en & {N_LED{pulse}};
endmodule
