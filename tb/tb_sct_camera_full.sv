// tb_sct_camera_full: the sector at its full size and default settings:
// 25 modules, 400 trigger pixels, 200 us dead time, 4-block (128-sample)
// readouts of 64 channels per module, power-on step of 4 us.
//
// Sequence: switch on all 25 modules over SPI (checks one module every
// 1001 cycles), enable all trigger channels, SYNC, let the storage wrap,
// then fire a triple that spans two modules (module 0 pixels 5 and 7 and
// the rotated module 1 pixel 15, which sit at grid positions (3,0), (3,1)
// and (4,0)). Checks the trigger time and pattern, that every module sends
// 64 records of 261 bytes with the right blocks and header, that a second
// triple 50 us later is vetoed by the dead time, and that a triple after
// the dead time triggers again.
module tb_sct_camera_full;
  import sct_pkg::*;
  localparam int NM   = 25;
  localparam int NTP  = NM * TP_PER_MOD;
  localparam int NBLK = 4;

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

  sct_camera dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_dig
    t7_digitizer_model #(.LAT(3), .MOD(m)) u_dig (
      .clk(clk_ph[0]), .rst_n, .rd_req(rd_req[m]), .rd_block(rd_block[m]), .rd_ch(rd_ch[m]),
      .smp_valid(smp_valid[m]), .smp_data(smp_data[m])
    );
  end

  always #0.5 clk_1g = ~clk_1g;
  always #2 clk_ph[0] = ~clk_ph[0];
  initial begin #1 forever #2 clk_ph[1] = ~clk_ph[1]; end
  initial begin #2 forever #2 clk_ph[2] = ~clk_ph[2]; end
  initial begin #3 forever #2 clk_ph[3] = ~clk_ph[3]; end
  logic clk;
  assign clk = clk_ph[0];
  initial foreach (out_ready[m]) out_ready[m] = 1'b1;

  initial begin : watchdog
    #1000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

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

  ns_time_t sv = 64'd123_456_788;
  bit       synced = 0;
  realtime  t0 = -1.0;
  always @(posedge clk) begin
    #0.1;
    if (synced && t0 < 0 && dut.bp_time == sv) t0 = $realtime - 0.1;
  end
  function automatic longint now_rel();
    return longint'($realtime - t0);
  endfunction

  longint rd_w0 = 0;
  ns_time_t tr_time[$];
  logic [NTP-1:0] tr_pat[$];
  always @(posedge clk) if (rst_n && bp_trig) begin
    if (!mod_busy[0]) rd_w0 = longint'((trig_time - sv) >> 5) - 1;
    tr_time.push_back(trig_time);
    tr_pat.push_back(trig_pattern);
  end

  int rec_len [NM], n_rec [NM], n_rd [NM];
  logic [7:0] hdr [NM][5];
  initial foreach (rec_len[m]) begin rec_len[m] = 0; n_rec[m] = 0; n_rd[m] = 0; end
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (rd_req[m]) begin
        chk(rd_block[m] == block_of_window(64'(rd_w0 + (n_rd[m] % NBLK))), $sformatf("mod %0d read block", m));
        n_rd[m]++;
      end
      if (out_valid[m] && out_ready[m]) begin
        if (out_sop[m]) rec_len[m] = 0;
        if (rec_len[m] < 5) hdr[m][rec_len[m]] = out_data[m];
        rec_len[m]++;
        if (out_eop[m]) begin
          chk(rec_len[m] == 261 && hdr[m][0] == 8'(m) && hdr[m][1] == 8'(n_rec[m] % 64)
              && {hdr[m][2][0], hdr[m][3]} == block_of_window(64'(rd_w0)),
              $sformatf("mod %0d record %0d len %0d", m, n_rec[m], rec_len[m]));
          n_rec[m]++;
        end
      end
    end
  end

  task automatic fire3(input int a, input int b, input int c, output longint t_edge);
    @(posedge clk);
    t_edge = now_rel();
    #0.5;
    mod_trig[a] = 1; mod_trig[b] = 1; mod_trig[c] = 1;
    #10;
    mod_trig = '0;
  endtask

  logic [7:0] q;
  initial begin
    longint t_fire;
    int t_on [NM];
    int n_on;
    foreach (i_grp[m, g]) i_grp[m][g] = 16'd1500;
    foreach (mon_value[i]) mon_value[i] = 16'(1000 + 7 * i);
    foreach (t_on[m]) t_on[m] = -1;
    #10 rst_n = 1;
    #100;
    // power: all 25 modules
    fork
      for (int k = 0; k < 4; k++) spi(0, k, 8'hFF, q);
      for (int c = 0; c < 27 * 1001; c++) begin
        @(posedge clk); #0.1;
        for (int m = 0; m < NM; m++) if (mod_pwr[m] && t_on[m] < 0) t_on[m] = c;
      end
    join
    n_on = 0;
    foreach (t_on[m]) if (t_on[m] >= 0) n_on++;
    chk(n_on == NM, $sformatf("%0d modules on", n_on));
    for (int m = 1; m < NM; m++) chk(t_on[m] - t_on[m-1] == 1001, $sformatf("power step %0d", m));
    // enables and SYNC
    for (int k = 0; k < NTP / 8; k++) spi(0, 32 + k, 8'hFF, q);
    for (int k = 0; k < 8; k++) spi(0, 8 + k, sv[8*k +: 8], q);
    synced = 1;
    spi(0, 5, 0, q);
    #17000;
    chk(t0 >= 0, "SYNC");
    // triple across the module 0 / module 1 border
    fire3(5, 7, 16 + 15, t_fire);
    #100;
    chk(tr_time.size() == 1, "trigger across modules");
    if (tr_time.size() == 1) begin
      chk(tr_time[0] == sv + 64'(t_fire + 1), $sformatf("trigger time %0d exp %0d", tr_time[0] - sv, t_fire + 1));
      chk(tr_pat[0] == ((NTP'(1) << 5) | (NTP'(1) << 7) | (NTP'(1) << 31)), "trigger pattern");
    end
    // inside the dead time
    #50000;
    fire3(200, 201, 202, t_fire);
    #100;
    chk(tr_time.size() == 1 && n_vetoed >= 1, "veto in 200 us dead time");
    wait (mod_busy == '0);
    #100;
    for (int m = 0; m < NM; m++)
      chk(n_rec[m] == 64 && n_rd[m] == 64 * NBLK, $sformatf("mod %0d records %0d", m, n_rec[m]));
    // after the dead time
    #160000;
    fire3(384, 385, 386, t_fire);   // module 24 pixels 0, 1, 2
    #100;
    chk(tr_time.size() == 2, "trigger after dead time");
    $display("triggers=%0d vetoed=%0d records(mod 0)=%0d", tr_time.size(), n_vetoed, n_rec[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
