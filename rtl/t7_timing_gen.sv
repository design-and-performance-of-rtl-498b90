// t7_timing_gen: sampling-control signals for the TARGET7 digitizer chips.
//
// The TARGET7 sampling array (64 capacitors in two groups of 32) and its
// transfer to the 512-block storage array are steered by six signals:
// SSTin (sample start), SSPin (sample stop), STRB1/STRB2 (write strobes of
// group 1/2) and Incr1/Incr2 (advance the group 1/2 write address). They
// repeat every 64 ns. This module runs a 0..63 phase counter on the 1 GHz
// clock and drives each signal high from its leading edge (LE, inclusive) to
// its trailing edge (TE, exclusive); when TE < LE the high time wraps around
// the end of the cycle (SSPin: 50 ns .. 3 ns of the next cycle).
//
// Default edges are the optimized settings of the published parameter table:
//   SSTin 0/32, SSPin 50/3, Incr1 3/18, STRB1 32/39, Incr2 35/50, STRB2 0/7.
// The edges are run-time inputs (cfg), captured at reset release and on sync,
// so the pre-pulse optimisation can be repeated without rebuilding.
//
// cfg_ok checks the captured settings against the two rules the sampling
// scheme depends on. First, each STRB must lie inside the 18 ns in which
// every capacitor of its group is holding. Capacitor i holds from
// SSTin_LE + i to SSPin_LE + i, so group g is fully holding from
// SSTin_LE + 32(g+1) to SSPin_LE + 32g. Second, each Incr must lie between
// the end of the previous STRB of its group and the start of the next one,
// so that the address is advanced before the transfer.
// Bad settings put part of a pulse in the wrong block ("pre-pulse").
// The rule arithmetic is modulo 64 and assumes PERIOD = 64.
//
// Timing: sync restarts the cycle; the edge after sync has phase 0. Outputs
// are registered, so a signal with LE = n is high during phase n.
module t7_timing_gen #(
  parameter int unsigned PERIOD = 64
) (
  input  logic       clk_1g,
  input  logic       rst_n,
  input  logic       sync,
  input  logic [5:0] cfg_le [6],   // 0 SSTin 1 SSPin 2 Incr1 3 STRB1 4 Incr2 5 STRB2
  input  logic [5:0] cfg_te [6],
  output logic       sstin,
  output logic       sspin,
  output logic       incr1,
  output logic       strb1,
  output logic       incr2,
  output logic       strb2,
  output logic [5:0] phase,
  output logic       cfg_ok        // settings obey the holding-window and Incr-before-STRB rules
);
  logic [5:0] le [6];
  logic [5:0] te [6];
  logic [5:0] ph_next;
  logic [5:0] hi;
  logic       started;

  assign ph_next = (!started || sync) ? 6'd0 :
                   (phase == 6'(PERIOD - 1)) ? 6'd0 : phase + 6'd1;

  function automatic logic in_window(logic [5:0] p, logic [5:0] l, logic [5:0] t);
    if (l <= t) return (p >= l) && (p < t);
    else        return (p >= l) || (p < t);
  endfunction

  always_comb begin
    for (int i = 0; i < 6; i++) hi[i] = in_window(ph_next, le[i], te[i]);
  end

  // [l, t) lies inside the w ns that start at a (all modulo 64)
  function automatic logic fits_in(logic [5:0] l, logic [5:0] t, logic [5:0] a, logic [5:0] w);
    logic [5:0] off, len;
    off = l - a;
    len = t - l;
    return (7'(off) + 7'(len)) <= 7'(w);
  endfunction

  logic [5:0] hold_w;                  // ns in which a whole group holds
  assign hold_w = le[1] - le[0] - 6'd32;
  assign cfg_ok = fits_in(le[3], te[3], le[0] + 6'd32, hold_w) &&      // STRB1 in group 1 hold
                  fits_in(le[5], te[5], le[0],         hold_w) &&      // STRB2 in group 2 hold
                  fits_in(le[2], te[2], te[3], le[3] - te[3]) &&       // Incr1 between STRB1s
                  fits_in(le[4], te[4], te[5], le[5] - te[5]);         // Incr2 between STRB2s

  always_ff @(posedge clk_1g or negedge rst_n) begin
    if (!rst_n) begin
      started <= 1'b0;
      phase   <= '0;
      {sstin, sspin, incr1, strb1, incr2, strb2} <= '0;
      for (int i = 0; i < 6; i++) begin
        le[i] <= '0;
        te[i] <= '0;
      end
    end else begin
      if (!started || sync) begin
        for (int i = 0; i < 6; i++) begin
          le[i] <= cfg_le[i];
          te[i] <= cfg_te[i];
        end
      end
      started <= 1'b1;
      phase   <= ph_next;
      if (!started || sync) begin
        // first phase-0 edge uses the new settings
        sstin <= in_window(6'd0, cfg_le[0], cfg_te[0]);
        sspin <= in_window(6'd0, cfg_le[1], cfg_te[1]);
        incr1 <= in_window(6'd0, cfg_le[2], cfg_te[2]);
        strb1 <= in_window(6'd0, cfg_le[3], cfg_te[3]);
        incr2 <= in_window(6'd0, cfg_le[4], cfg_te[4]);
        strb2 <= in_window(6'd0, cfg_le[5], cfg_te[5]);
      end else begin
        {strb2, incr2, strb1, incr1, sspin, sstin} <= hi;
      end
    end
  end
endmodule
