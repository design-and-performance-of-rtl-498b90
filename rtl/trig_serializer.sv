// trig_serializer: packs a backplane trigger record into link words.
//
// On each trigger the backplane sends the 1 ns trigger time and the latched
// hit pattern over a high-speed serial link. This block turns one record
// into a stream of 16-bit words for a SerDes: a start word 0xBC50 flagged by
// tx_k, the 64-bit time in four words (most significant first), then the
// N_BITS-bit pattern in ceil(N_BITS/16) words, least significant word first
// (25 words for 400 bits, 30 words per record in all).
//
// Interface: in_valid for one cycle with in_time/in_pattern; a record that
// arrives while the previous one is still being sent is dropped and counted.
// Timing: one word per clock, starting the cycle after in_valid.
// That time and pattern are serialized is from the camera description; the
// framing is this design's choice.
module trig_serializer
  import sct_pkg::*;
#(
  parameter int unsigned N_BITS = 400
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  ns_time_t          in_time,
  input  logic [N_BITS-1:0] in_pattern,
  output logic              tx_valid,
  output logic [15:0]       tx_word,
  output logic              tx_k,
  output logic [15:0]       n_dropped
);
  localparam int unsigned PW    = (N_BITS + 15) / 16;
  localparam int unsigned NW    = 1 + 4 + PW;
  localparam logic [15:0] START = 16'hBC50;

  logic [16*PW-1:0]      pat_q;
  ns_time_t              time_q;
  logic [$clog2(NW+1)-1:0] idx;
  logic                  active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pat_q <= '0; time_q <= '0; idx <= '0; active <= 1'b0; n_dropped <= '0;
    end else begin
      if (in_valid && !active) begin
        pat_q  <= (16*PW)'(in_pattern);
        time_q <= in_time;
        idx    <= '0;
        active <= 1'b1;
      end else begin
        if (in_valid) n_dropped <= n_dropped + 1'b1;
        if (active) begin
          if (32'(idx) == NW - 1) active <= 1'b0;
          idx <= idx + 1'b1;
        end
      end
    end
  end

  always_comb begin
    tx_valid = active;
    tx_k     = active && (idx == '0);
    tx_word  = '0;
    if (active) begin
      if (idx == '0)          tx_word = START;
      else if (32'(idx) <= 4) tx_word = time_q[16*(4 - 32'(idx)) +: 16];
      else                    tx_word = pat_q[16*(32'(idx) - 5) +: 16];
    end
  end
endmodule
