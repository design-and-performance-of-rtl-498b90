// sct_camera: one instrumented sector of the camera (the prototype camera).
//
// A sector is N_MOD camera modules plugged into one backplane. Each module
// (fee_fpga) samples its 64 pixels into TARGET7 analog memories and reports
// 16 trigger-pixel discriminator outputs. The backplane's trigger FPGA
// (bp_trigger) looks for three adjacent trigger pixels firing together,
// sampled on four 1 ns clock phases, and on a trigger sends a TACK with the
// 1 ns trigger time to every module, which then reads its waveforms and
// streams them to the network switch boards. The trigger record (time and
// hit pattern) is serialized for the trigger link (trig_serializer), and the
// trigger pulse drives the laser time-tagging path, modelled here as a
// direct wire into the GPS time tagger (gps_ttag). The housekeeping FPGA
// (hk_fpga) gives the housekeeping computer SPI access to module and switch
// power, trigger-channel enables and SYNC. A flasher pulse former
// (flasher_pulser) is included for the calibration LEDs.
//
// Ports carry what the sector exchanges with parts that are not logic: the
// module triggers (from the TARGET7 analog trigger), the TARGET7 control and
// digitizer buses, the SiPM current readings and trim codes, the data
// streams to the network switches and the trigger link.
//
// Clocks: clk_ph[0..3] are the 250 MHz logic clock and its copies delayed by
// 1, 2 and 3 ns; clk_1g is the 1 GHz sampling clock, rising with clk_ph[0].
// The connections follow the camera block diagram; the single logic clock
// for backplane and modules is this design's simplification.
module sct_camera
  import sct_pkg::*;
#(
  parameter int unsigned N_MOD        = 25,
  parameter int unsigned DEADTIME_CYC = 50000,
  parameter int unsigned N_RD_BLK     = 4,
  parameter int unsigned SEQ_GAP      = 1000
) (
  input  logic [3:0]                  clk_ph,
  input  logic                        clk_1g,
  input  logic                        rst_n,
  // module triggers, module-major (m*16 + trigger pixel)
  input  logic [N_MOD*TP_PER_MOD-1:0] mod_trig,
  // housekeeping SPI
  input  logic                        sclk,
  input  logic                        cs_n,
  input  logic                        mosi,
  output logic                        miso,
  output logic [N_MOD-1:0]            mod_pwr,
  output logic [1:0]                  dacq_pwr,
  // backplane ADC readings: module m voltage (2m), current (2m+1), then
  // backplane voltage, current and temperature
  input  logic [15:0]                 mon_value [2*N_MOD+3],
  // TARGET7 interfaces, one per module
  output logic [5:0]                  t7_ctrl   [N_MOD],
  output logic                        wr_valid  [N_MOD],
  output blk_id_t                     wr_block  [N_MOD],
  output logic                        rd_req    [N_MOD],
  output blk_id_t                     rd_block  [N_MOD],
  output logic [5:0]                  rd_ch     [N_MOD],
  input  logic                        smp_valid [N_MOD],
  input  logic [SAMPLE_BITS-1:0]      smp_data  [N_MOD],
  // waveform data to the network switch boards
  output logic                        out_valid [N_MOD],
  output logic [7:0]                  out_data  [N_MOD],
  output logic                        out_sop   [N_MOD],
  output logic                        out_eop   [N_MOD],
  input  logic                        out_ready [N_MOD],
  // SiPM bias (trim writes arrive over the network, modelled as a bus)
  input  logic [N_MOD-1:0]            trim_wr_en,
  input  logic [3:0]                  trim_wr_grp,
  input  logic [11:0]                 trim_wr_code,
  input  logic [15:0]                 i_grp     [N_MOD][16],
  input  logic                        trip_clear,
  output logic [11:0]                 trim_code [N_MOD][16],
  output logic [N_MOD-1:0]            module_on,
  // trigger outputs
  output logic                        bp_trig,
  output ns_time_t                    trig_time,
  output logic [N_MOD*TP_PER_MOD-1:0] trig_pattern,
  output logic                        tx_valid,
  output logic [15:0]                 tx_word,
  output logic                        tx_k,
  // GPS time tagging
  input  logic                        pps,
  output logic                        tag_valid,
  output logic [31:0]                 tag_sec,
  output logic [29:0]                 tag_ns,
  // flasher
  input  logic                        flash_trig,
  input  logic [9:0]                  flash_led_en,
  output logic [9:0]                  flash_led,
  // status
  output logic [31:0]                 n_trig,
  output logic [31:0]                 n_vetoed,
  output logic [N_MOD-1:0]            mod_busy
);
  logic clk;
  assign clk = clk_ph[0];

  // ---- housekeeping ----
  logic [N_MOD*TP_PER_MOD-1:0] trig_en;
  logic                        sync;
  ns_time_t                    sync_value;
  hk_fpga #(.N_MOD(N_MOD), .SEQ_GAP(SEQ_GAP)) u_hk (
    .clk, .rst_n, .sclk, .cs_n, .mosi, .miso,
    .mod_pwr, .dacq_pwr, .trig_en, .sync, .sync_value, .n_trig, .mon_value
  );

  // ---- backplane time and trigger ----
  ns_time_t bp_time;
  ns_timer #(.STEP_NS(4)) u_bp_time (
    .clk, .rst_n, .sync, .sync_value, .time_ns(bp_time)
  );

  bp_trigger #(.N_MOD(N_MOD), .DEADTIME_CYC(DEADTIME_CYC)) u_trig (
    .clk_ph, .rst_n, .mod_trig, .trig_en, .time_now(bp_time),
    .bp_trig, .trig_time, .trig_pattern, .n_trig, .n_vetoed
  );

  logic [15:0] ser_dropped;
  trig_serializer #(.N_BITS(N_MOD*TP_PER_MOD)) u_ser (
    .clk, .rst_n, .in_valid(bp_trig), .in_time(trig_time), .in_pattern(trig_pattern),
    .tx_valid, .tx_word, .tx_k, .n_dropped(ser_dropped)
  );

  logic [31:0] n_tags;
  gps_ttag #(.NS_PER_CLK(4)) u_ttag (
    .clk, .rst_n, .pps, .pulse(bp_trig), .tag_valid, .tag_sec, .tag_ns, .n_tags
  );

  flasher_pulser #(.N_LED(10), .WIDTH(4)) u_flash (
    .clk, .rst_n, .trig_in(flash_trig), .led_en(flash_led_en), .led(flash_led)
  );

  // ---- modules ----
  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    ns_time_t    t_ns;
    logic [15:0] n_ev, n_drop;
    logic        trip;
    fee_fpga #(.MOD_ID(8'(m)), .N_RD_BLK(N_RD_BLK)) u_fee (
      .clk, .clk_1g, .rst_n, .sync, .sync_value,
      .tack_valid(bp_trig), .tack_time(trig_time),
      .t7_ctrl(t7_ctrl[m]), .wr_valid(wr_valid[m]), .wr_block(wr_block[m]),
      .rd_req(rd_req[m]), .rd_block(rd_block[m]), .rd_ch(rd_ch[m]),
      .smp_valid(smp_valid[m]), .smp_data(smp_data[m]),
      .out_valid(out_valid[m]), .out_data(out_data[m]), .out_sop(out_sop[m]),
      .out_eop(out_eop[m]), .out_ready(out_ready[m]),
      .trim_wr_en(trim_wr_en[m]), .trim_wr_grp, .trim_wr_code,
      .i_grp(i_grp[m]), .trip_clear, .trim_code(trim_code[m]),
      .module_on(module_on[m]), .tripped(trip),
      .time_ns(t_ns), .busy(mod_busy[m]), .n_events(n_ev), .n_dropped(n_drop)
    );
  end
endmodule
