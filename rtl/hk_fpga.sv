// hk_fpga: housekeeping FPGA of the backplane.
//
// The housekeeping computer talks to the backplane over one SPI link. This
// block is the SPI slave plus the registers behind it: power of each module
// (via FETs) and of the two DACQ boards, the trigger-channel enables used by
// the trigger FPGA, and the SYNC command that sets every 1 ns time counter
// in the sector to a given value. Module power is switched on in sequence,
// one module every SEQ_GAP cycles, to limit the inrush current; switching off
// is immediate.
//
// SPI: mode 0 (sample on rising SCLK, shift on falling), CS_N low for one
// 16-bit frame, MSB first: bit 15 = 1 read / 0 write, bits 14:8 address,
// bits 7:0 write data; on a read the register is returned in bits 7:0 of the
// same frame. SCLK, CS_N and MOSI are synchronised into clk, so SCLK must be
// slower than clk/4.
//
// Register map (byte registers):
//   0-3    module power request, bit m = module m        (R/W)
//   4      DACQ power, bits 1:0                          (R/W)
//   5      write: issue SYNC with the value in 8-15      (W)
//   6      monitor select                                (R/W)
//   24-25  selected monitor reading, 24 = bits 7:0       (R)
//          (reading 24 latches all 16 bits for 25)
//   8-15   SYNC value, byte 8 = bits 7:0                 (R/W)
//   16-19  trigger count from the trigger FPGA           (R)
//   20-23  module power actually on                      (R)
//   32-81  trigger enable, byte 32+k = channels 8k..8k+7 (R/W)
// The monitor readings (mon_value, from the backplane ADCs: voltage and
// current of each module's supply, then backplane voltage, current and
// temperature) are read one at a time through the select register.
// Everything after reset is off/disabled.
// The functions are those the camera description lists for this FPGA; the
// SPI framing, register map and sequencing step are this design's choices.
module hk_fpga
  import sct_pkg::*;
#(
  parameter int unsigned N_MOD   = 25,
  parameter int unsigned SEQ_GAP = 1000,
  parameter int unsigned N_MON   = 2 * N_MOD + 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sclk,
  input  logic                        cs_n,
  input  logic                        mosi,
  output logic                        miso,
  output logic [N_MOD-1:0]            mod_pwr,
  output logic [1:0]                  dacq_pwr,
  output logic [N_MOD*TP_PER_MOD-1:0] trig_en,
  output logic                        sync,
  output ns_time_t                    sync_value,
  input  logic [31:0]                 n_trig,
  input  logic [15:0]                 mon_value [N_MON]
);
  localparam int unsigned NTP   = N_MOD * TP_PER_MOD;
  localparam int unsigned NTEB  = (NTP + 7) / 8;     // trigger-enable bytes

  // ---- synchronisers ----
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end
  end
  logic rise, fall, sel;
  assign rise = sclk_s[1] & ~sclk_s[2];
  assign fall = ~sclk_s[1] & sclk_s[2];
  assign sel  = ~cs_s[1];

  // ---- registers ----
  logic [31:0]       pwr_req;
  logic [63:0]       sync_val_q;
  logic [8*NTEB-1:0] ten_q;
  logic [31:0]       pwr_on;
  logic [7:0]        mon_sel;
  logic [15:0]       mon_hold;
  logic [15:0]       mon_cur;
  localparam int MSW = $clog2(N_MON);   // index width of the monitor array
  assign mon_cur = (32'(mon_sel) < N_MON) ? mon_value[mon_sel[MSW-1:0]] : 16'd0;

  // ---- SPI shift logic ----
  logic [4:0]  bitcnt;
  logic [15:0] rx_sr;
  logic [7:0]  tx_sr;
  logic [6:0]  addr;
  logic        rd;

  function automatic logic [7:0] rdreg(logic [6:0] a);
    logic [7:0] v;
    v = '0;
    if (a <= 7'd3)                         v = pwr_req[8*a +: 8];
    else if (a == 7'd4)                    v = {6'b0, dacq_pwr};
    else if (a == 7'd6)                    v = mon_sel;
    else if (a == 7'd24)                   v = mon_cur[7:0];
    else if (a == 7'd25)                   v = mon_hold[15:8];
    else if (a >= 7'd8  && a <= 7'd15)     v = sync_val_q[8*(a-7'd8) +: 8];
    else if (a >= 7'd16 && a <= 7'd19)     v = n_trig[8*(a-7'd16) +: 8];
    else if (a >= 7'd20 && a <= 7'd23)     v = pwr_on[8*(a-7'd20) +: 8];
    else if (a >= 7'd32 && 32'(a) < 32 + NTEB) v = ten_q[8*(32'(a)-32) +: 8];
    return v;
  endfunction

  // ---- power sequencing ----
  localparam int unsigned GW = (SEQ_GAP > 1) ? $clog2(SEQ_GAP + 1) : 1;
  logic [GW-1:0] gap;
  logic [31:0]   pending;
  logic [31:0]   lowest;
  assign pending = pwr_req & ~pwr_on & ((N_MOD >= 32) ? '1 : ((32'd1 << N_MOD) - 1));
  assign lowest  = pending & (~pending + 32'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt <= '0; rx_sr <= '0; tx_sr <= '0; addr <= '0; rd <= 1'b0; miso <= 1'b0;
      pwr_req <= '0; dacq_pwr <= '0; sync_val_q <= '0; ten_q <= '0;
      sync <= 1'b0; pwr_on <= '0; gap <= '0; mon_sel <= '0; mon_hold <= '0;
    end else begin
      sync <= 1'b0;
      if (!sel) begin
        bitcnt <= '0;
      end else begin
        if (rise) begin
          rx_sr  <= {rx_sr[14:0], mosi_s[1]};
          bitcnt <= bitcnt + 5'd1;
          if (bitcnt == 5'd7) begin
            rd    <= rx_sr[6];
            addr  <= {rx_sr[5:0], mosi_s[1]};
            tx_sr <= rdreg({rx_sr[5:0], mosi_s[1]});
            if (rx_sr[6] && {rx_sr[5:0], mosi_s[1]} == 7'd24) mon_hold <= mon_cur;
          end
          if (bitcnt == 5'd15 && !rd) begin
            // write: register addr <= {rx_sr[6:0], mosi}
            if (addr <= 7'd3)                     pwr_req[8*addr +: 8] <= {rx_sr[6:0], mosi_s[1]};
            else if (addr == 7'd4)                dacq_pwr <= {rx_sr[0], mosi_s[1]};
            else if (addr == 7'd5)                sync <= 1'b1;
            else if (addr == 7'd6)                mon_sel <= {rx_sr[6:0], mosi_s[1]};
            else if (addr >= 7'd8 && addr <= 7'd15) sync_val_q[8*(addr-7'd8) +: 8] <= {rx_sr[6:0], mosi_s[1]};
            else if (addr >= 7'd32 && 32'(addr) < 32 + NTEB)
              ten_q[8*(32'(addr)-32) +: 8] <= {rx_sr[6:0], mosi_s[1]};
          end
        end
        if (fall && bitcnt >= 5'd8) begin
          miso  <= tx_sr[7];
          tx_sr <= {tx_sr[6:0], 1'b0};
        end
      end

      // power: off at once, on one module per SEQ_GAP cycles
      pwr_on <= pwr_on & pwr_req;
      if (gap != '0) begin
        gap <= gap - 1'b1;
      end else if (pending != '0) begin
        pwr_on <= (pwr_on & pwr_req) | lowest;
        gap    <= GW'(SEQ_GAP);
      end
    end
  end

  assign mod_pwr    = pwr_on[N_MOD-1:0];
  assign trig_en    = ten_q[NTP-1:0];
  assign sync_value = sync_val_q;
endmodule
