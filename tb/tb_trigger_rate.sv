// tb_trigger_rate: the backplane trigger at its default size (25 modules,
// 200 us dead time) under two long pulse trains, as in a threshold rate scan.
//
// Three adjacent trigger pixels (module 0, pixels 0, 1, 2) receive 10 ns
// pulses, all at the same time, every P ns. The pulses start 0.5 ns after a
// 1 ns sampling edge.
//  * Noise-like train, P = 110 ns for 2.2 ms: the trigger rate must saturate.
//    Successive triggers must be at least 200 us apart and at most one pulse
//    period more, so the rate ends up just under 5 kHz.
//  * Signal-like train at 1 kHz (P = 1 ms) for 4 pulses: every pulse must
//    trigger and the time stamps must be exactly 1 ms apart.
// The veto counter counts 4 ns windows that hold a coincidence during the
// dead time. Each pulse is sampled at 1 ns steps 1 to 10 ns after a phase-1
// edge, so it lies in 3 windows. With 20000 pulses and 11 triggers,
// 60000 - 11 windows are vetoed. At 1 kHz only the two later windows of each
// triggering pulse are.
// The expected values come from the pulse schedule, not from the design.
module tb_trigger_rate;
  import sct_pkg::*;
  localparam int NTP = 25 * 16;
  localparam longint DT_NS = 200_000;

  logic [3:0]     clk_ph = '0;
  logic           rst_n = 0;
  logic [NTP-1:0] mod_trig = '0, trig_en = '1, trig_pattern;
  ns_time_t       time_now = '0, trig_time;
  logic           bp_trig;
  logic [31:0]    n_trig, n_vetoed;
  int checks = 0, failures = 0;

  bp_trigger dut (.*);

  // four 250 MHz phases, 1 ns apart; clk_ph[p] rises at 2 + p + 4k ns
  for (genvar p = 0; p < 4; p++) begin : g_clk
    initial begin
      #(1.0 * p);
      forever begin #2 clk_ph[p] = ~clk_ph[p]; end
    end
  end
  always @(posedge clk_ph[0]) time_now <= time_now + 64'd4;

  initial begin : watchdog
    #8_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // trigger log
  longint tt [$];
  always @(posedge clk_ph[0]) if (rst_n && bp_trig) tt.push_back(longint'(trig_time));

  task automatic pulse_train(longint period, int n);
    for (int k = 0; k < n; k++) begin
      mod_trig[2:0] = 3'b111;
      #10;
      mod_trig[2:0] = 3'b000;
      #(1.0 * (period - 10));
    end
  endtask

  initial begin
    longint d;
    int n_sat;
    logic [31:0] veto0;
    #20 rst_n = 1;
    // start pulses 0.5 ns after a clk_ph edge
    @(posedge clk_ph[1]) #0.5;

    // ---- saturation ----
    pulse_train(110, 20000);          // 2.2 ms
    #300;
    n_sat = tt.size();
    checks++;
    if (n_sat != 11) begin failures++; $display("FAIL saturated triggers %0d, exp 11", n_sat); end
    for (int i = 1; i < n_sat; i++) begin
      d = tt[i] - tt[i-1];
      checks++;
      if (d < DT_NS || d > DT_NS + 110 + 16) begin
        failures++; $display("FAIL trigger interval %0d ns", d);
      end
    end
    checks++;
    if (n_trig != 32'(n_sat)) begin failures++; $display("FAIL n_trig %0d", n_trig); end
    checks++;
    if (n_vetoed != 32'(3 * 20000 - n_sat)) begin failures++; $display("FAIL n_vetoed %0d", n_vetoed); end
    $display("saturated rate: %0d triggers in 2.2 ms, %0d vetoed windows", n_sat, n_vetoed);

    // ---- 1 kHz ----
    #(1.0 * DT_NS);                   // let the dead time run out
    veto0 = n_vetoed;
    pulse_train(1_000_000, 4);
    #300;
    checks++;
    if (tt.size() != n_sat + 4) begin failures++; $display("FAIL 1 kHz triggers %0d", tt.size() - n_sat); end
    for (int i = n_sat + 1; i < tt.size(); i++) begin
      checks++;
      if (tt[i] - tt[i-1] != 1_000_000) begin
        failures++; $display("FAIL 1 kHz interval %0d ns", tt[i] - tt[i-1]);
      end
    end
    checks++;
    if (n_vetoed - veto0 != 32'd8) begin failures++; $display("FAIL vetoes at 1 kHz %0d", n_vetoed - veto0); end
    checks++;
    if (trig_pattern != NTP'(3'b111)) begin failures++; $display("FAIL pattern"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
