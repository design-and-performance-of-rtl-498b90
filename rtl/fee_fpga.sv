// fee_fpga: digital logic of one camera module's front-end FPGA.
//
// Ties together what the module does with time and data:
//  * ns_timer keeps the sector-wide 1 ns time, loaded by SYNC;
//  * t7_timing_gen drives the TARGET7 sampling signals (SSTin, SSPin, STRB,
//    Incr) with the optimized edge table; its 64 ns cycle is restarted by
//    SYNC so that phase 0 falls on the 1 ns edge where the time equals the
//    SYNC value;
//  * t7_wr_addr follows the storage write address, so wr_block reports in
//    which block each 32 ns window is stored (for monitoring);
//  * fee_readout reads the blocks around a TACK time and sends waveform
//    records to the DACQ network switch;
//  * sipm_bias_guard holds the trim-DAC codes and enforces the 128 mA
//    module current limit.
//
// Clocks: clk is the 250 MHz logic clock (4 ns), clk_1g the 1 GHz sampling
// clock, rising together with clk. The readout is given the TACK time minus
// the last SYNC value, so its window numbers (time / 32) count from the
// SYNC like the write order does; SYNC values must be multiples of 4 ns
// (one clk period). The SYNC reaches clk_1g through an edge detector and two
// more flops, which places the restart exactly on the next clk edge.
// The single logic clock domain (the real module runs on the backplane's
// 8 ns clock) is this design's simplification.
module fee_fpga
  import sct_pkg::*;
#(
  parameter logic [7:0]  MOD_ID   = 8'd0,
  parameter int unsigned N_RD_BLK = 4,
  parameter int unsigned PRE_BLK  = 1
) (
  input  logic                   clk,
  input  logic                   clk_1g,
  input  logic                   rst_n,
  input  logic                   sync,
  input  ns_time_t               sync_value,
  input  logic                   tack_valid,
  input  ns_time_t               tack_time,
  // TARGET7 control and digitizer interface
  output logic [5:0]             t7_ctrl,      // {strb2, incr2, strb1, incr1, sspin, sstin}
  output logic                   wr_valid,
  output blk_id_t                wr_block,
  output logic                   rd_req,
  output blk_id_t                rd_block,
  output logic [5:0]             rd_ch,
  input  logic                   smp_valid,
  input  logic [SAMPLE_BITS-1:0] smp_data,
  // data to the DACQ board
  output logic                   out_valid,
  output logic [7:0]             out_data,
  output logic                   out_sop,
  output logic                   out_eop,
  input  logic                   out_ready,
  // SiPM bias
  input  logic                   trim_wr_en,
  input  logic [3:0]             trim_wr_grp,
  input  logic [11:0]            trim_wr_code,
  input  logic [15:0]            i_grp [16],
  input  logic                   trip_clear,
  output logic [11:0]            trim_code [16],
  output logic                   module_on,
  output logic                   tripped,
  // status
  output ns_time_t               time_ns,
  output logic                   busy,
  output logic [15:0]            n_events,
  output logic [15:0]            n_dropped
);
  // ---- time ----
  ns_timer #(.STEP_NS(4)) u_time (
    .clk, .rst_n, .sync, .sync_value, .time_ns
  );

  // ---- SYNC into the 1 GHz domain ----
  logic sync_q, s1, s2, s3;
  always_ff @(posedge clk_1g or negedge rst_n) begin
    if (!rst_n) {sync_q, s1, s2, s3} <= '0;
    else begin
      sync_q <= sync;
      s1     <= sync & ~sync_q;
      s2     <= s1;
      s3     <= s2;
    end
  end

  // time since the last SYNC, used for the block mapping of the readout
  ns_time_t sync_base, tack_rel;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sync_base <= '0;
    else if (sync) sync_base <= sync_value;
  end
  assign tack_rel = tack_time - sync_base;

  // ---- TARGET7 timing and write addressing ----
  logic [5:0] cfg_le [6];
  logic [5:0] cfg_te [6];
  // SSTin, SSPin, Incr1, STRB1, Incr2, STRB2 (optimized settings)
  assign cfg_le = '{6'd0,  6'd50, 6'd3,  6'd32, 6'd35, 6'd0};
  assign cfg_te = '{6'd32, 6'd3,  6'd18, 6'd39, 6'd50, 6'd7};

  logic sstin, sspin, incr1, strb1, incr2, strb2;
  logic [5:0] phase;
  t7_timing_gen u_tgen (
    .clk_1g, .rst_n, .sync(s3), .cfg_le, .cfg_te,
    .sstin, .sspin, .incr1, .strb1, .incr2, .strb2, .phase,
    .cfg_ok()     // the fixed table above satisfies the rules; left open
  );
  assign t7_ctrl = {strb2, incr2, strb1, incr1, sspin, sstin};

  blk_id_t wr_addr1, wr_addr2;
  logic    wr_group;
  t7_wr_addr u_wadr (
    .clk_1g, .rst_n, .sync(s3), .incr1, .incr2, .strb1, .strb2,
    .wr_addr1, .wr_addr2, .wr_valid, .wr_block, .wr_group
  );

  // ---- readout ----
  fee_readout #(.N_CH(CH_PER_MOD), .N_RD_BLK(N_RD_BLK), .PRE_BLK(PRE_BLK), .MOD_ID(MOD_ID)) u_rd (
    .clk, .rst_n, .tack_valid, .tack_time(tack_rel),
    .rd_req, .rd_block, .rd_ch, .smp_valid, .smp_data,
    .out_valid, .out_data, .out_sop, .out_eop, .out_ready,
    .busy, .n_events, .n_dropped
  );

  // ---- SiPM bias ----
  logic [19:0] i_sum;
  sipm_bias_guard u_bias (
    .clk, .rst_n, .wr_en(trim_wr_en), .wr_grp(trim_wr_grp), .wr_code(trim_wr_code),
    .i_grp, .clear(trip_clear), .trim_code, .module_on, .tripped, .i_sum
  );
endmodule
