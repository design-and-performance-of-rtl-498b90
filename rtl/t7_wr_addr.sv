// t7_wr_addr: storage-array write addressing of the TARGET7 digitizer.
//
// The storage array holds N_BLOCKS blocks of 32 samples (8 rows x 64
// columns). Sampling group 1 writes only even blocks and group 2 only odd
// blocks; the leading edge of Incr1 (Incr2) advances the group 1 (group 2)
// write address by 2, and the leading edge of STRB1 (STRB2) starts the
// transfer of that group into the addressed block. While one group transfers,
// the other samples ("ping-pong"), so consecutive 32 ns windows land in
// blocks 0, 3, 2, 5, 4, 7, ... (+3/-1 pattern).
//
// After reset or sync the addresses are 510 (group 1) and 1 (group 2); with
// the standard timing, where each Incr precedes its STRB, the first transfers
// go to blocks 0 and 3 as in the published sequence. The start values are
// this design's choice made to reproduce that sequence. The group 2 transfer
// that follows right after sync carries the window sampled before sync.
//
// Timing: edges are detected on clk_1g; wr_valid pulses for one cycle, one
// cycle after the STRB leading edge is seen, with the block and group.
module t7_wr_addr
  import sct_pkg::*;
#(
  parameter int unsigned N_BLOCKS = 512
) (
  input  logic    clk_1g,
  input  logic    rst_n,
  input  logic    sync,
  input  logic    incr1,
  input  logic    incr2,
  input  logic    strb1,
  input  logic    strb2,
  output blk_id_t wr_addr1,
  output blk_id_t wr_addr2,
  output logic    wr_valid,
  output blk_id_t wr_block,
  output logic    wr_group      // 0 = group 1, 1 = group 2
);
  logic incr1_q, incr2_q, strb1_q, strb2_q;

  function automatic blk_id_t add2(blk_id_t a);
    return blk_id_t'((32'(a) + 2) % N_BLOCKS);
  endfunction

  always_ff @(posedge clk_1g or negedge rst_n) begin
    if (!rst_n) begin
      {incr1_q, incr2_q, strb1_q, strb2_q} <= '0;
      wr_addr1 <= blk_id_t'(N_BLOCKS - 2);
      wr_addr2 <= blk_id_t'(1);
      wr_valid <= 1'b0;
      wr_block <= '0;
      wr_group <= 1'b0;
    end else begin
      {incr1_q, incr2_q, strb1_q, strb2_q} <= {incr1, incr2, strb1, strb2};
      wr_valid <= 1'b0;
      if (sync) begin
        wr_addr1 <= blk_id_t'(N_BLOCKS - 2);
        wr_addr2 <= blk_id_t'(1);
        {incr1_q, incr2_q, strb1_q, strb2_q} <= '0;
      end else begin
        if (incr1 && !incr1_q) wr_addr1 <= add2(wr_addr1);
        if (incr2 && !incr2_q) wr_addr2 <= add2(wr_addr2);
        if (strb1 && !strb1_q) begin
          wr_valid <= 1'b1;
          wr_block <= wr_addr1;
          wr_group <= 1'b0;
        end else if (strb2 && !strb2_q) begin
          wr_valid <= 1'b1;
          wr_block <= wr_addr2;
          wr_group <= 1'b1;
        end
      end
    end
  end

  // The two groups must never be connected to the storage array at once.
  strb_exclusive: assert property (@(posedge clk_1g) disable iff (!rst_n) !(strb1 && strb2));
endmodule
