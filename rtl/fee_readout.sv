// fee_readout: waveform readout controller of one front-end module.
//
// When the backplane acknowledges a trigger (TACK) it sends the 1 ns time of
// the trigger. The module turns that time into TARGET7 storage-block
// addresses: window w = t / 32 counted from the last SYNC is stored in block
// w mod 512 if w is even and (w + 2) mod 512 if w is odd (the +3/-1 write
// order). Starting PRE_BLK windows before the trigger window it reads
// N_RD_BLK consecutive windows (default 4 blocks = 128 samples) of every one
// of the N_CH channels and sends one record per channel:
//
//   byte 0    MOD_ID
//   byte 1    channel number
//   byte 2-3  block id of the first window (9 bits, big-endian)
//   byte 4    event counter, low 8 bits
//   then      2 bytes per sample (12-bit ADC value, big-endian)
//
// i.e. 5 + 64 * N_RD_BLK bytes (261 bytes for 4 blocks, 133 for 2).
//
// Digitizer interface: rd_req pulses for one cycle with rd_block/rd_ch; the
// digitizer later returns the 32 samples of that block on consecutive
// smp_valid cycles, with no back-pressure. They are kept in a 32-entry
// buffer and then sent on the byte stream (out_valid/out_ready, out_sop on
// the first byte of a record, out_eop on the last).
//
// A TACK that arrives while a readout is running is dropped and counted in
// n_dropped. The 5-byte header, 2 bytes per sample and 4-block readout are
// from the camera description; the header fields, the digitizer handshake
// and PRE_BLK are this design's choices.
module fee_readout
  import sct_pkg::*;
#(
  parameter int unsigned N_CH     = 64,
  parameter int unsigned N_RD_BLK = 4,
  parameter int unsigned PRE_BLK  = 1,
  parameter logic [7:0]  MOD_ID   = 8'd0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   tack_valid,
  input  ns_time_t               tack_time,
  output logic                   rd_req,
  output blk_id_t                rd_block,
  output logic [5:0]             rd_ch,
  input  logic                   smp_valid,
  input  logic [SAMPLE_BITS-1:0] smp_data,
  output logic                   out_valid,
  output logic [7:0]             out_data,
  output logic                   out_sop,
  output logic                   out_eop,
  input  logic                   out_ready,
  output logic                   busy,
  output logic [15:0]            n_events,
  output logic [15:0]            n_dropped
);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_REQ, S_WAIT, S_SEND} state_t;
  state_t state;

  logic [63:0]            w0;           // first window of the readout
  logic [5:0]             ch;
  logic [$clog2(N_RD_BLK+1)-1:0] blk_i;
  logic [2:0]             hdr_i;
  logic [5:0]             buf_n;        // samples received for the current block
  logic [6:0]             byte_i;       // byte of the current block (0..63)
  logic [SAMPLE_BITS-1:0] sbuf [T7_BLOCK_LEN];
  blk_id_t                first_blk;

  assign first_blk = block_of_window(w0);
  assign busy      = (state != S_IDLE);

  logic [7:0] hdr_byte;
  always_comb begin
    unique case (hdr_i)
      3'd0:    hdr_byte = MOD_ID;
      3'd1:    hdr_byte = {2'b00, ch};
      3'd2:    hdr_byte = {7'b0, first_blk[8]};
      3'd3:    hdr_byte = first_blk[7:0];
      default: hdr_byte = n_events[7:0];
    endcase
  end

  logic [15:0] smp16;
  assign smp16 = 16'(sbuf[byte_i[5:1]]);

  logic last_blk, last_ch;
  assign last_blk = (32'(blk_i) == N_RD_BLK - 1);
  assign last_ch  = (32'(ch) == N_CH - 1);

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    out_sop   = 1'b0;
    out_eop   = 1'b0;
    if (state == S_HDR) begin
      out_valid = 1'b1;
      out_data  = hdr_byte;
      out_sop   = (hdr_i == 3'd0);
    end else if (state == S_SEND) begin
      out_valid = 1'b1;
      out_data  = byte_i[0] ? smp16[7:0] : smp16[15:8];
      out_eop   = last_blk && (byte_i == 7'd63);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      w0        <= '0;
      ch        <= '0;
      blk_i     <= '0;
      hdr_i     <= '0;
      buf_n     <= '0;
      byte_i    <= '0;
      rd_req    <= 1'b0;
      rd_block  <= '0;
      rd_ch     <= '0;
      n_events  <= '0;
      n_dropped <= '0;
    end else begin
      rd_req <= 1'b0;
      if (tack_valid && state != S_IDLE) n_dropped <= n_dropped + 1'b1;
      unique case (state)
        S_IDLE: if (tack_valid) begin
          w0    <= (tack_time >> 5) - 64'(PRE_BLK);
          ch    <= '0;
          hdr_i <= '0;
          state <= S_HDR;
        end
        S_HDR: if (out_ready) begin
          if (hdr_i == 3'(HDR_BYTES - 1)) begin
            hdr_i <= '0;
            blk_i <= '0;
            state <= S_REQ;
          end else begin
            hdr_i <= hdr_i + 3'd1;
          end
        end
        S_REQ: begin
          rd_req   <= 1'b1;
          rd_block <= block_of_window(w0 + 64'(blk_i));
          rd_ch    <= ch;
          buf_n    <= '0;
          state    <= S_WAIT;
        end
        S_WAIT: if (smp_valid) begin
          sbuf[buf_n[4:0]] <= smp_data;
          buf_n <= buf_n + 6'd1;
          if (buf_n == 6'(T7_BLOCK_LEN - 1)) begin
            byte_i <= '0;
            state  <= S_SEND;
          end
        end
        S_SEND: if (out_ready) begin
          if (byte_i == 7'd63) begin
            if (!last_blk) begin
              blk_i <= blk_i + 1'b1;
              state <= S_REQ;
            end else if (!last_ch) begin
              ch    <= ch + 6'd1;
              state <= S_HDR;
            end else begin
              n_events <= n_events + 1'b1;
              state    <= S_IDLE;
            end
          end else begin
            byte_i <= byte_i + 7'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Samples may only arrive while a block is awaited.
  smp_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    smp_valid |-> state == S_WAIT);
endmodule
