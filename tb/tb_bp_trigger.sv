// tb_bp_trigger: self-checking test of the backplane trigger logic.
//
// Module-trigger pulses (10 ns) are placed at quarter-ns offsets so that the
// four 1 ns sampling phases matter. For each event the expected result is
// worked out independently: the trigger-pixel layout of a module is written
// out from the module pixel map, odd module columns are rotated by 180
// degrees, and the first whole nanosecond at which three connected hit
// pixels are all high gives the expected time stamp and hit pattern. Also
// checked: the 1.5 ns overlap case, a pair (no trigger), a masked channel,
// the dead time, and the trigger latency (three clk_ph[0] cycles after the
// 4 ns window that holds the coincidence).
module tb_bp_trigger;
  import sct_pkg::*;
  localparam int NM = 25, NTP = NM * 16, GX = 20, DT = 25;

  logic [3:0]     clk_ph = '0;
  logic           rst_n = 0;
  logic [NTP-1:0] mod_trig = '0, trig_en = '1, trig_pattern;
  ns_time_t       time_now = '0, trig_time;
  logic           bp_trig;
  logic [31:0]    n_trig, n_vetoed;
  int checks = 0, failures = 0;

  bp_trigger #(.N_MOD(NM), .DEADTIME_CYC(DT)) dut (.*);

  // ---- clocks and pulse playback in quarter-ns ticks ----
  int q = 0;
  int st_q [NTP];
  int en_q [NTP];
  initial for (int i = 0; i < NTP; i++) begin st_q[i] = 0; en_q[i] = 0; end

  initial forever begin
    #0.25;
    q++;
    for (int i = 0; i < NTP; i++) mod_trig[i] = (q >= st_q[i]) && (q < en_q[i]);
    if (q % 4 == 0)
      for (int p = 0; p < 4; p++) clk_ph[p] = (((q / 4 - p) % 4 + 4) % 4) < 2;
  end
  always @(posedge clk_ph[0]) time_now <= ns_time_t'(q / 4);

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- independent geometry ----
  // (x, y) of trigger pixel tp inside a module, read off the pixel map
  int lx [16] = '{0,1,0,1, 2,3,2,3, 0,1,0,1, 2,3,2,3};
  int ly [16] = '{0,0,1,1, 0,0,1,1, 2,2,3,3, 2,2,3,3};
  function automatic int gx(int ch);
    int m = ch / 16, tp = ch % 16, c = m % 5;
    return c * 4 + ((c % 2) ? 3 - lx[tp] : lx[tp]);
  endfunction
  function automatic int gy(int ch);
    int m = ch / 16, tp = ch % 16, c = m % 5;
    return (m / 5) * 4 + ((c % 2) ? 3 - ly[tp] : ly[tp]);
  endfunction
  function automatic bit adj(int a, int b);
    int dx = gx(a) - gx(b), dy = gy(a) - gy(b);
    return (a != b) && dx <= 1 && dx >= -1 && dy <= 1 && dy >= -1;
  endfunction
  function automatic bit coinc_of(int lst[$]);
    foreach (lst[i]) foreach (lst[j]) foreach (lst[k])
      if (i < j && j < k &&
          int'(adj(lst[i], lst[j])) + int'(adj(lst[j], lst[k])) + int'(adj(lst[i], lst[k])) >= 2)
        return 1;
    return 0;
  endfunction

  // ---- trigger monitor ----
  int       n_seen = 0;
  ns_time_t seen_time;
  logic [NTP-1:0] seen_pat;
  longint   seen_at;
  // bp_trig is seen here one edge after it was set
  always @(posedge clk_ph[0]) if (bp_trig) begin
    n_seen++;
    seen_time = trig_time;
    seen_pat  = trig_pattern;
    seen_at   = longint'(q / 4);
  end

  int n_overlap_ok = 0, n_rot_ok = 0;

  // Schedule pulses (start in quarter ns, width in ns) and check the outcome.
  task automatic event_check(int chans[$], int starts_q[$], string name, bit expect_veto = 0);
    int base = n_seen;
    int s_exp = -1;
    int t_end;
    logic [NTP-1:0] pat_exp = '0;
    foreach (chans[i]) begin
      st_q[chans[i]] = starts_q[i];
      en_q[chans[i]] = starts_q[i] + 40;
    end
    // first whole ns with a coincidence among enabled, high channels
    for (int s = starts_q.min()[0] / 4; s < starts_q.max()[0] / 4 + 12 && s_exp < 0; s++) begin
      int hi[$];
      foreach (chans[i])
        if (trig_en[chans[i]] && st_q[chans[i]] <= 4 * s && 4 * s < en_q[chans[i]]) hi.push_back(chans[i]);
      if (coinc_of(hi)) begin
        s_exp = s;
        foreach (hi[i]) pat_exp[hi[i]] = 1'b1;
      end
    end
    t_end = starts_q.max()[0] / 4 + 40;
    while (q / 4 < t_end) @(posedge clk_ph[0]);
    checks++;
    if (s_exp < 0 || expect_veto) begin
      if (n_seen != base) begin failures++; $display("FAIL %s: unexpected trigger", name); end
    end else if (n_seen != base + 1) begin
      failures++; $display("FAIL %s: %0d triggers, expected 1", name, n_seen - base);
    end else begin
      checks += 3;
      if (seen_time != ns_time_t'(s_exp)) begin
        failures++; $display("FAIL %s: time %0d expected %0d", name, seen_time, s_exp);
      end
      if (seen_pat !== pat_exp) begin failures++; $display("FAIL %s: pattern", name); end
      if (seen_at != longint'((s_exp / 4) * 4 + 16)) begin
        failures++; $display("FAIL %s: latency, trigger at %0d for sample %0d", name, seen_at, s_exp);
      end
    end
    foreach (chans[i]) begin st_q[chans[i]] = 0; en_q[chans[i]] = 0; end
  endtask

  initial begin
    int t;
    #20 rst_n = 1;
    #20;
    // three pixels in one module, all starting together
    t = q + 600;  event_check('{0, 1, 2}, '{t + 1, t + 1, t + 1}, "same-start");
    // diagonal chain, different starts: last one decides
    t = q + 600;  event_check('{0, 3, 12}, '{t + 1, t + 6, t + 11}, "chain");
    // 1.5 ns overlap of the third pulse with the first two
    t = q + 600;  event_check('{16, 17, 18}, '{t + 1, t + 1, t + 35}, "overlap1.5");
    n_overlap_ok = (n_seen == 3);
    // across modules 0 and 1: module 1 is rotated, its tp15 lies next to tp5/tp7 of module 0
    t = q + 600;  event_check('{5, 7, 16 + 15}, '{t + 2, t + 3, t + 1}, "rotated");
    n_rot_ok = (n_seen == 4);
    // a pair only
    t = q + 600;  event_check('{40, 41}, '{t + 1, t + 1}, "pair");
    // masked channel breaks the triple
    trig_en[50] = 1'b0;
    t = q + 600;  event_check('{48, 49, 50}, '{t + 1, t + 1, t + 1}, "masked");
    trig_en[50] = 1'b1;
    // dead time: second event 40 ns after the first is vetoed
    t = q + 600;  event_check('{100, 101, 102}, '{t + 1, t + 1, t + 1}, "before-dead");
    begin
      int v0;
      v0 = int'(n_vetoed);
      t = q + 8;  event_check('{200, 201, 202}, '{t + 1, t + 1, t + 1}, "in-dead", 1);
      checks++;
      if (int'(n_vetoed) <= v0) begin failures++; $display("FAIL veto count"); end
    end
    // random events across the sector
    for (int e = 0; e < 60; e++) begin
      int ch[$], st[$];
      int m, n, c;
      ch.delete(); st.delete();
      m = int'($urandom % NM);
      n = 2 + int'($urandom % 4);
      t = q + 4 * (DT + 10) * 4;
      for (int i = 0; i < n; i++) begin
        c = m * 16 + int'($urandom % 16);
        if (!(c inside {ch})) begin ch.push_back(c); st.push_back(t + 1 + int'($urandom % 12)); end
      end
      if (m + 1 < NM && ($urandom % 2)) begin
        ch.push_back((m + 1) * 16 + int'($urandom % 16)); st.push_back(t + 2);
      end
      event_check(ch, st, "random");
    end
    checks += 2;
    if (!n_overlap_ok) begin failures++; $display("FAIL overlap case"); end
    if (!n_rot_ok) begin failures++; $display("FAIL rotated case"); end
    checks++;
    if (n_trig != 32'(n_seen)) begin failures++; $display("FAIL n_trig %0d vs %0d", n_trig, n_seen); end
    checks++;
    if (n_seen < 20) begin failures++; $display("FAIL only %0d triggers", n_seen); end
    $display("triggers=%0d vetoed_windows=%0d", n_seen, n_vetoed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
