// sipm_bias_guard: SiPM trim-voltage registers and module over-current guard.
//
// Each module biases its 64 SiPM pixels in N_GRP groups of four. The common
// high voltage is fixed; a per-group DAC sets the anode (trim) voltage
// between 0 and 4 V in 1 mV steps, and a sensor measures each group's
// current. This block holds the trim codes (in mV, clamped to TRIM_MAX_MV),
// adds the group currents every cycle and, when the module total reaches
// I_LIMIT_UA (128 mA), latches a trip: module_on drops and every trim code
// sent to the DACs is forced to 0 until clear is pulsed. Group readings above
// what a DAC can sink (50 mA) are saturated before the sum.
//
// Interface: wr_en/wr_grp/wr_code write one stored code; i_grp are the
// current readings in uA. Timing: i_sum and the trip are registered, so the
// trip takes effect one cycle after the readings cross the limit.
// The limits are those of the camera description; the units, the clamp and
// the clear input are this design's choices.
module sipm_bias_guard #(
  parameter int unsigned N_GRP        = 16,
  parameter int unsigned TRIM_MAX_MV  = 4000,
  parameter int unsigned I_LIMIT_UA   = 128000,
  parameter int unsigned I_GRP_MAX_UA = 50000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [3:0]  wr_grp,
  input  logic [11:0] wr_code,
  input  logic [15:0] i_grp [N_GRP],
  input  logic        clear,
  output logic [11:0] trim_code [N_GRP],
  output logic        module_on,
  output logic        tripped,
  output logic [19:0] i_sum
);
  logic [11:0] code_q [N_GRP];
  logic [19:0] sum_d;

  always_comb begin
    sum_d = '0;
    for (int g = 0; g < int'(N_GRP); g++)
      sum_d += (32'(i_grp[g]) > I_GRP_MAX_UA) ? 20'(I_GRP_MAX_UA) : 20'(i_grp[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < int'(N_GRP); g++) code_q[g] <= '0;
      tripped <= 1'b0;
      i_sum   <= '0;
    end else begin
      i_sum <= sum_d;
      if (wr_en && 32'(wr_grp) < N_GRP)
        code_q[wr_grp] <= (32'(wr_code) > TRIM_MAX_MV) ? 12'(TRIM_MAX_MV) : wr_code;
      if (32'(sum_d) >= I_LIMIT_UA) tripped <= 1'b1;
      else if (clear)               tripped <= 1'b0;
    end
  end

  assign module_on = !tripped;
  always_comb
    for (int g = 0; g < int'(N_GRP); g++) trim_code[g] = tripped ? 12'd0 : code_q[g];
endmodule
