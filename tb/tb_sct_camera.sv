// tb_sct_camera: end-to-end test of one sector, scaled down to 4 modules,
// an 8 us dead time, 2-block (64-sample) readouts and a short power-on
// step so that it runs quickly. Every module has a digitizer model.
//
// The housekeeping computer is played by an SPI master. The test walks
// through the camera's mechanisms and counts each one it sees work:
//   power   modules switched on one by one, DACQ power on
//   monitor module and backplane ADC readings read back over SPI
//   mask    a triple on a disabled trigger channel gives no trigger
//   sync    SYNC sets the sector time, trigger times count from it
//   trigger three adjacent trigger pixels give a backplane trigger with the
//           right 1 ns time and hit pattern
//   veto    a triple inside the dead time is vetoed and counted
//   readout every module reads the blocks of the trigger time and sends
//           64 records of 133 bytes with its module id
//   wrorder storage transfers follow the +3/-1 block order after SYNC
//   tackdrop a TACK that arrives during a readout is dropped by the modules
//   serial  each trigger is sent as a link frame with its time and pattern
//   ttag    each trigger is GPS time-tagged, seconds counted from PPS
//   flasher a flasher trigger gives one LED pulse on the enabled LEDs
//   trip    a module over 128 mA is switched off with its trims at 0
// A mechanism that never happened counts as a failure.
module tb_sct_camera;
  import sct_pkg::*;
  localparam int NM   = 4;
  localparam int NTP  = NM * TP_PER_MOD;
  localparam int DT   = 2000;     // 8 us
  localparam int NBLK = 2;
  localparam int GAP  = 50;

  logic [3:0] clk_ph = '0;
  logic clk_1g = 1, rst_n = 0;
  logic [NTP-1:0] mod_trig = '0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic [NM-1:0] mod_pwr;
  logic [1:0] dacq_pwr;
  logic [15:0] mon_value [2*NM+3];
  logic [5:0] t7_ctrl [NM];
  logic wr_valid [NM], rd_req [NM], smp_valid [NM];
  blk_id_t wr_block [NM], rd_block [NM];
  logic [5:0] rd_ch [NM];
  logic [11:0] smp_data [NM];
  logic out_valid [NM], out_sop [NM], out_eop [NM], out_ready [NM];
  logic [7:0] out_data [NM];
  logic [NM-1:0] trim_wr_en = '0;
  logic [3:0] trim_wr_grp = '0;
  logic [11:0] trim_wr_code = '0;
  logic [15:0] i_grp [NM][16];
  logic trip_clear = 0;
  logic [11:0] trim_code [NM][16];
  logic [NM-1:0] module_on;
  logic bp_trig, tx_valid, tx_k, pps = 0, tag_valid, flash_trig = 0;
  ns_time_t trig_time;
  logic [NTP-1:0] trig_pattern;
  logic [15:0] tx_word;
  logic [31:0] tag_sec, n_trig, n_vetoed;
  logic [29:0] tag_ns;
  logic [9:0] flash_led_en = '0, flash_led;
  logic [NM-1:0] mod_busy;
  int checks = 0, failures = 0;

  sct_camera #(.N_MOD(NM), .DEADTIME_CYC(DT), .N_RD_BLK(NBLK), .SEQ_GAP(GAP)) dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_dig
    t7_digitizer_model #(.LAT(3), .MOD(m)) u_dig (
      .clk(clk_ph[0]), .rst_n, .rd_req(rd_req[m]), .rd_block(rd_block[m]), .rd_ch(rd_ch[m]),
      .smp_valid(smp_valid[m]), .smp_data(smp_data[m])
    );
  end

  // per-module event / dropped-TACK counters and times
  logic [15:0] mod_nev [NM], mod_ndrop [NM];
  ns_time_t    mod_time [NM];
  for (genvar m = 0; m < NM; m++) begin : g_mon
    assign mod_nev[m]   = dut.g_mod[m].n_ev;
    assign mod_ndrop[m] = dut.g_mod[m].n_drop;
    assign mod_time[m]  = dut.g_mod[m].t_ns;
  end

  // clocks: clk_1g rises at every ns, clk_ph[p] at 2 + p + 4k ns
  always #0.5 clk_1g = ~clk_1g;
  always #2 clk_ph[0] = ~clk_ph[0];
  initial begin #1 forever #2 clk_ph[1] = ~clk_ph[1]; end
  initial begin #2 forever #2 clk_ph[2] = ~clk_ph[2]; end
  initial begin #3 forever #2 clk_ph[3] = ~clk_ph[3]; end
  logic clk;
  assign clk = clk_ph[0];
  always @(posedge clk) for (int m = 0; m < NM; m++) out_ready[m] <= ($urandom % 4) != 0;

  initial begin : watchdog
    #3000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  // ---- mechanism counters ----
  int m_power = 0, m_mask = 0, m_sync = 0, m_trigger = 0, m_veto = 0, m_readout = 0;
  int m_monitor = 0, m_wrorder = 0, m_tackdrop = 0, m_serial = 0, m_ttag = 0, m_flasher = 0, m_trip = 0;

  // ---- SPI master (mode 0, 16-bit frames) ----
  task automatic spi(input bit rd, input int a, input logic [7:0] d, output logic [7:0] q);
    logic [15:0] f;
    f = {rd, 7'(a), d};
    q = '0;
    cs_n = 0; #40;
    for (int i = 15; i >= 0; i--) begin
      mosi = f[i]; #20;
      sclk = 1;
      if (i < 8) q = {q[6:0], miso};
      #20; sclk = 0;
    end
    #40; cs_n = 1; #80;
  endtask

  // ---- sector time reference ----
  ns_time_t  sv = 64'd7_000_000_012;    // SYNC value
  bit        synced = 0;
  realtime   t0 = -1.0;                 // clk edge at which the time equals sv
  always @(posedge clk) begin
    #0.1;
    if (synced && t0 < 0 && dut.bp_time == sv) t0 = $realtime - 0.1;
  end
  function automatic longint now_rel();
    return longint'($realtime - t0);
  endfunction

  // ---- storage write order on every module ----
  always @(posedge clk_1g) if (t0 >= 0) begin
    for (int m = 0; m < NM; m++) if (wr_valid[m]) begin
      longint w;
      w = now_rel() - 16;
      if (w >= 0) begin
        w = w / 32;
        chk(wr_block[m] == block_of_window(64'(w)), $sformatf("mod %0d window %0d block %0d", m, w, wr_block[m]));
        if (m == 0) m_wrorder++;
      end
    end
  end

  longint rd_w0 = 0;   // first window of the readout

  // ---- backplane triggers ----
  ns_time_t       tr_time[$];
  logic [NTP-1:0] tr_pat[$];
  always @(posedge clk) if (rst_n && bp_trig) begin
    // modules that are idle take the TACK and read the windows around it
    if (!mod_busy[0]) rd_w0 = longint'((trig_time - sv) >> 5) - 1;
    tr_time.push_back(trig_time);
    tr_pat.push_back(trig_pattern);
  end

  // ---- trigger link frames ----
  int widx = -1;
  logic [63:0] f_time;
  logic [16*((NTP+15)/16)-1:0] f_pat;
  int n_frames = 0;
  always @(posedge clk) if (rst_n && tx_valid) begin
    if (tx_k) widx = 0;
    else if (widx >= 0 && widx < 4) begin f_time = {f_time[47:0], tx_word}; widx++; end
    else if (widx >= 4) begin
      f_pat[16*(widx-4) +: 16] = tx_word; widx++;
      if (widx == 4 + (NTP+15)/16) begin
        chk(n_frames < tr_time.size() && f_time == tr_time[n_frames] && f_pat[NTP-1:0] == tr_pat[n_frames],
            $sformatf("link frame %0d", n_frames));
        if (n_frames < tr_time.size() && f_time == tr_time[n_frames]) m_serial++;
        n_frames++;
        widx = -1;
      end
    end
  end

  // ---- GPS tags ----
  int tg_sec[$];
  longint tg_ns[$];
  always @(posedge clk) if (rst_n && tag_valid) begin tg_sec.push_back(int'(tag_sec)); tg_ns.push_back(longint'(tag_ns)); end

  // ---- readout: records and read blocks per module ----
  int rec_len [NM], n_rec [NM], n_rd [NM];
  logic [7:0] hdr [NM][5];
  initial foreach (rec_len[m]) begin rec_len[m] = 0; n_rec[m] = 0; n_rd[m] = 0; end
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (rd_req[m]) begin
        chk(rd_block[m] == block_of_window(64'(rd_w0 + (n_rd[m] % NBLK))),
            $sformatf("mod %0d read block %0d", m, rd_block[m]));
        n_rd[m]++;
      end
      if (out_valid[m] && out_ready[m]) begin
        if (out_sop[m]) rec_len[m] = 0;
        if (rec_len[m] < 5) hdr[m][rec_len[m]] = out_data[m];
        rec_len[m]++;
        if (out_eop[m]) begin
          chk(rec_len[m] == int'(record_bytes(NBLK)) && hdr[m][0] == 8'(m) && hdr[m][1] == 8'(n_rec[m] % 64)
              && {hdr[m][2][0], hdr[m][3]} == block_of_window(64'(rd_w0)),
              $sformatf("mod %0d record %0d len %0d", m, n_rec[m], rec_len[m]));
          n_rec[m]++;
        end
      end
    end
  end

  // ---- flasher ----
  always @(posedge clk) if (rst_n && flash_led != 0) begin
    chk((flash_led & ~flash_led_en) == 0, "flasher LEDs enabled only");
    m_flasher++;
  end

  // three trigger pixels of module m high for 10 ns, from 0.5 ns after a
  // clk edge; t_edge returns that edge's time relative to the SYNC time
  task automatic fire(input int m, input int tp0, input int tp1, input int tp2, output longint t_edge);
    @(posedge clk);
    t_edge = now_rel();
    #0.5;
    mod_trig[m*16 + tp0] = 1; mod_trig[m*16 + tp1] = 1; mod_trig[m*16 + tp2] = 1;
    #10;
    mod_trig = '0;
  endtask

  logic [7:0] q;
  initial begin
    longint t_fire;
    int n_tr0, nv0;
    foreach (i_grp[m, g]) i_grp[m][g] = 16'd1500;
    foreach (mon_value[i]) mon_value[i] = 16'(1000 + 7 * i);
    #10 rst_n = 1;
    #100;
    chk(mod_pwr == 0 && module_on == '1, "all off after reset");

    // -- power --
    spi(0, 4, 8'h03, q);
    begin
      int t_on [NM];
      int order [$];
      foreach (t_on[m]) t_on[m] = -1;
      fork
        spi(0, 0, 8'(((1 << NM) - 1)), q);
        for (int c = 0; c < (NM + 3) * (GAP + 1) + 300; c++) begin
          @(posedge clk); #0.1;
          for (int m = 0; m < NM; m++) if (mod_pwr[m] && t_on[m] < 0) begin t_on[m] = c; order.push_back(m); end
        end
      join
      chk(dacq_pwr == 2'b11, "DACQ power");
      chk(order.size() == NM, "all modules on");
      for (int i = 1; i < order.size(); i++)
        chk(order[i] == i && t_on[order[i]] - t_on[order[i-1]] == GAP + 1, "power-on sequence");
      if (order.size() == NM && dacq_pwr == 2'b11) m_power++;
    end

    // -- monitor readings: current of the last module, backplane temperature --
    begin
      logic [7:0] lo;
      int ok;
      ok = 0;
      foreach (mon_value[i]) if (i == 2 * NM - 1 || i == 2 * NM + 2) begin
        spi(0, 6, 8'(i), q);
        spi(1, 24, 0, lo);
        spi(1, 25, 0, q);
        chk({q, lo} == mon_value[i], $sformatf("monitor %0d", i));
        if ({q, lo} == mon_value[i]) ok++;
      end
      if (ok == 2) m_monitor++;
    end

    // -- trigger enables: all on except module 0 trigger pixel 2 --
    for (int k = 0; k < NTP / 8; k++) spi(0, 32 + k, (k == 0) ? 8'hFB : 8'hFF, q);
    spi(1, 32, 0, q);
    chk(q == 8'hFB, "enable readback");

    // -- SYNC --
    for (int k = 0; k < 8; k++) spi(0, 8 + k, sv[8*k +: 8], q);
    synced = 1;
    spi(0, 5, 0, q);
    #100;
    chk(t0 >= 0, "sector time set by SYNC");
    for (int m = 0; m < NM; m++)
      chk(mod_time[m] == dut.bp_time, "module time equals backplane time");
    if (t0 >= 0) m_sync++;
    pps = 1; #20 pps = 0;           // one GPS second
    #17000;                          // storage wraps once

    // -- mask: triple that includes the disabled pixel --
    n_tr0 = int'(n_trig);
    fire(0, 0, 1, 2, t_fire);
    #100;
    chk(int'(n_trig) == n_tr0, "masked triple gives no trigger");
    if (int'(n_trig) == n_tr0) m_mask++;

    // -- trigger on module 1, pixels 0, 1, 2 --
    fire(1, 0, 1, 2, t_fire);
    #100;
    chk(int'(n_trig) == n_tr0 + 1 && tr_time.size() == 1, "trigger");
    if (tr_time.size() == 1) begin
      ns_time_t exp_t;
      exp_t = sv + 64'(t_fire + 1);      // first 1 ns sample after the pulse start
      chk(tr_time[0] == exp_t, $sformatf("trigger time %0d expected %0d", tr_time[0] - sv, exp_t - sv));
      chk(tr_pat[0] == (NTP'(7) << 16), "trigger pattern");
      if (tr_time[0] == exp_t && tr_pat[0] == (NTP'(7) << 16)) m_trigger++;
    end

    // -- veto inside the dead time --
    #2000;
    nv0 = int'(n_vetoed);
    fire(2, 4, 5, 6, t_fire);
    #100;
    chk(int'(n_vetoed) > nv0 && tr_time.size() == 1, "vetoed in dead time");
    if (int'(n_vetoed) > nv0 && tr_time.size() == 1) m_veto++;

    // -- second trigger after the dead time, while the modules read out --
    #7000;
    chk(mod_busy == '1, "modules busy with the first readout");
    fire(3, 8, 9, 10, t_fire);
    #100;
    chk(tr_time.size() == 2, "second trigger");
    wait (mod_busy == '0);
    #200;
    for (int m = 0; m < NM; m++) begin
      chk(mod_ndrop[m] == 1 && mod_nev[m] == 1, $sformatf("mod %0d TACK drop", m));
      chk(n_rec[m] == 64 && n_rd[m] == 64 * NBLK, $sformatf("mod %0d records %0d reads %0d", m, n_rec[m], n_rd[m]));
    end
    if (mod_ndrop[0] == 1) m_tackdrop++;
    if (n_rec[0] == 64 && n_rec[NM-1] == 64) m_readout++;

    // -- link frames and GPS tags --
    chk(n_frames == 2, $sformatf("link frames %0d", n_frames));
    chk(tg_sec.size() == 2, "two GPS tags");
    if (tg_sec.size() == 2 && tr_time.size() == 2) begin
      longint dtag, dtrig;
      dtag  = tg_ns[1] - tg_ns[0];
      dtrig = longint'(tr_time[1] - tr_time[0]);
      chk(tg_sec[0] == 1 && tg_sec[1] == 1, "GPS seconds");
      chk(dtag - dtrig >= -3 && dtag - dtrig <= 3, $sformatf("GPS tag spacing %0d vs %0d", dtag, dtrig));
      if (tg_sec[0] == 1 && dtag - dtrig >= -3 && dtag - dtrig <= 3) m_ttag++;
    end

    // -- flasher --
    flash_led_en = 10'b10_0110_0001;
    @(negedge clk) flash_trig = 1;
    repeat (6) @(negedge clk);
    flash_trig = 0;
    repeat (4) @(negedge clk);

    // -- over-current trip on module 1 --
    @(negedge clk) begin trim_wr_en = 4'b0010; trim_wr_grp = 4'd3; trim_wr_code = 12'd3100; end
    @(negedge clk) trim_wr_en = '0;
    @(negedge clk);
    chk(trim_code[1][3] == 12'd3100, "trim written");
    foreach (i_grp[1][g]) i_grp[1][g] = 16'd8100;
    repeat (3) @(negedge clk);
    chk(module_on == 4'b1101 && trim_code[1][3] == 0, "module 1 tripped");
    if (module_on == 4'b1101 && trim_code[1][3] == 0) m_trip++;

    // -- mechanism summary --
    $display("mechanisms: power=%0d monitor=%0d mask=%0d sync=%0d trigger=%0d veto=%0d readout=%0d wrorder=%0d tackdrop=%0d serial=%0d ttag=%0d flasher=%0d trip=%0d",
             m_power, m_monitor, m_mask, m_sync, m_trigger, m_veto, m_readout, m_wrorder, m_tackdrop, m_serial, m_ttag, m_flasher, m_trip);
    chk(m_power > 0,    "mechanism power never seen");
    chk(m_monitor > 0,  "mechanism monitor never seen");
    chk(m_mask > 0,     "mechanism mask never seen");
    chk(m_sync > 0,     "mechanism sync never seen");
    chk(m_trigger > 0,  "mechanism trigger never seen");
    chk(m_veto > 0,     "mechanism veto never seen");
    chk(m_readout > 0,  "mechanism readout never seen");
    chk(m_wrorder > 0,  "mechanism write order never seen");
    chk(m_tackdrop > 0, "mechanism TACK drop never seen");
    chk(m_serial > 0,   "mechanism link frame never seen");
    chk(m_ttag > 0,     "mechanism GPS tag never seen");
    chk(m_flasher > 0,  "mechanism flasher never seen");
    chk(m_trip > 0,     "mechanism over-current trip never seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
