// tb_fee_fpga: one module FPGA with the digitizer model. Checks that
//  * after SYNC the module time starts at the SYNC value and the TARGET7
//    cycle (SSTin leading edge) is locked to it;
//  * every storage transfer goes to the block the +3/-1 order assigns to
//    its 32 ns window, counted from SYNC;
//  * each TACK reads exactly the blocks that hold the windows around the
//    TACK time (compared with the writes observed), also after the storage
//    has wrapped, and sends 64 records of 5 + 2*128 bytes with the header;
//  * a TACK during a readout is dropped and counted;
//  * the 128 mA current limit trips the module and zeroes the trims.
module tb_fee_fpga;
  import sct_pkg::*;
  localparam logic [7:0] MID = 8'd17;
  localparam int NBLK = 4, PRE = 1;
  logic clk = 0, clk_1g = 1, rst_n = 0, sync = 0, tack_valid = 0;
  ns_time_t sync_value = '0, tack_time = '0, time_ns;
  logic [5:0] t7_ctrl, rd_ch;
  logic wr_valid, rd_req, smp_valid, out_valid, out_sop, out_eop, out_ready;
  blk_id_t wr_block, rd_block;
  logic [11:0] smp_data;
  logic [7:0] out_data;
  logic trim_wr_en = 0, trip_clear = 0, module_on, tripped, busy;
  logic [3:0] trim_wr_grp = 0;
  logic [11:0] trim_wr_code = 0;
  logic [15:0] i_grp [16];
  logic [11:0] trim_code [16];
  logic [15:0] n_events, n_dropped;
  int checks = 0, failures = 0;

  fee_fpga #(.MOD_ID(MID), .N_RD_BLK(NBLK), .PRE_BLK(PRE)) dut (.*);
  t7_digitizer_model #(.LAT(3), .MOD(int'(MID))) u_dig (
    .clk, .rst_n, .rd_req, .rd_block, .rd_ch, .smp_valid, .smp_data
  );

  always #0.5 clk_1g = ~clk_1g;   // rising edges at 1, 2, 3, ... ns
  always #2   clk    = ~clk;      // rising edges at 2, 6, 10, ... ns
  initial begin : watchdog
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // ---- time reference: clk edge at which time_ns == sync value ----
  realtime t0 = -1.0;
  bit      synced = 0;
  always @(posedge clk) begin
    #0.1;
    if (synced && t0 < 0 && time_ns == sync_value) t0 = $realtime - 0.1;
  end
  function automatic int trel();
    return int'($realtime - t0);
  endfunction

  // ---- writes: window -> block ----
  int wmap [int];
  int n_wr = 0, n_wr_any = 0;
  always @(posedge clk_1g) if (wr_valid) n_wr_any++;
  always @(posedge clk_1g) if (t0 >= 0 && wr_valid) begin
    int w;
    w = (trel() - 16) >= 0 ? (trel() - 16) / 32 : -1;
    if (w >= 0) begin
      n_wr++;
      chk(wr_block == block_of_window(64'(w)), $sformatf("write of window %0d in block %0d", w, wr_block));
      wmap[w] = int'(wr_block);
    end
  end

  // ---- SSTin phase ----
  logic sst_q = 0;
  int   n_sst = 0;
  always @(posedge clk_1g) begin
    if (t0 >= 0 && t7_ctrl[0] && !sst_q) begin
      n_sst++;
      chk(((trel() % 64) + 64) % 64 <= 1, $sformatf("SSTin edge at phase %0d", trel() % 64));
    end
    sst_q <= t7_ctrl[0];
  end

  // ---- reads against the observed writes ----
  int rd_w0, rd_i = 0, rd_ch_exp = 0;
  always @(posedge clk) if (rst_n && rd_req) begin
    int w;
    w = rd_w0 + rd_i;
    chk(wmap.exists(w) && int'(rd_block) == wmap[w],
        $sformatf("read window %0d: block %0d, written %0d", w, rd_block, wmap.exists(w) ? wmap[w] : -1));
    chk(int'(rd_ch) == rd_ch_exp, "channel order");
    rd_i++;
    if (rd_i == NBLK) begin rd_i = 0; rd_ch_exp = (rd_ch_exp + 1) % 64; end
  end

  // ---- output records ----
  int rec_len = 0, n_rec = 0;
  logic [7:0] hdr [5];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_sop) rec_len = 0;
    if (rec_len < 5) hdr[rec_len] = out_data;
    rec_len++;
    if (out_eop) begin
      n_rec++;
      chk(rec_len == int'(record_bytes(NBLK)), $sformatf("record length %0d", rec_len));
      chk(hdr[0] == MID, "header module id");
      chk({hdr[2][0], hdr[3]} == 9'(wmap.exists(rd_w0) ? wmap[rd_w0] : 0), "header first block");
    end
  end
  always @(posedge clk) out_ready <= ($urandom % 4) != 0;

  initial begin
    int rel;
    foreach (i_grp[g]) i_grp[g] = 16'd2000;
    #10 rst_n = 1;
    repeat (20) @(negedge clk);
    // SYNC at a value that is not a multiple of the storage depth
    // driven just after a clk edge, as a register in the clk domain would
    @(posedge clk) #0.1 begin sync = 1; sync_value = 64'd1_000_000_004; synced = 1; end
    @(posedge clk) #0.1 sync = 0;
    // let the storage wrap once (16.384 us)
    #20000;
    chk(t0 >= 0, "time reached the SYNC value");
    chk(n_wr > 600, $sformatf("writes observed %0d", n_wr));
    chk(n_sst > 300, "SSTin running");
    for (int ev = 0; ev < 3; ev++) begin
      rel = trel() - 200 - int'($urandom % 12000);
      @(negedge clk);
      rd_w0 = rel / 32 - PRE; rd_i = 0; rd_ch_exp = 0;
      tack_valid = 1; tack_time = sync_value + 64'(rel);
      @(negedge clk) tack_valid = 0;
      if (ev == 1) begin
        repeat (100) @(negedge clk);
        tack_valid = 1; tack_time = sync_value + 64'(trel());
        @(negedge clk) tack_valid = 0;
      end
      wait (!busy);
      repeat (4) @(negedge clk);
    end
    chk(n_rec == 3 * 64, $sformatf("records %0d", n_rec));
    chk(n_events == 3 && n_dropped == 1, $sformatf("events %0d dropped %0d", n_events, n_dropped));
    // bias: trims, then over-current trip
    @(negedge clk) begin trim_wr_en = 1; trim_wr_grp = 4'd9; trim_wr_code = 12'd2500; end
    @(negedge clk) trim_wr_en = 0;
    @(negedge clk) chk(trim_code[9] == 12'd2500 && module_on, "trim written");
    foreach (i_grp[g]) i_grp[g] = 16'd8100;   // 129.6 mA
    repeat (3) @(negedge clk);
    chk(tripped && !module_on && trim_code[9] == 0, "over-current trip");
    $display("writes=%0d any=%0d t0=%0t records=%0d", n_wr, n_wr_any, t0, n_rec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
