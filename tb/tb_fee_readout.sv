// tb_fee_readout: sends TACKs with random trigger times to the readout
// controller, answers its block requests with the behavioural digitizer and
// checks every record byte by byte: 5-byte header, then 2 bytes per sample
// for 4 blocks of 32 samples (261 bytes), for all 64 channels. The expected
// blocks come from a model of the ping-pong write counters (not from the
// block formula of the design). The output side applies random back-pressure.
// A TACK during a readout must be dropped and counted.
module tb_fee_readout;
  import sct_pkg::*;
  localparam int NCH = 64, NBLK = 4, PRE = 1;
  logic clk = 0, rst_n = 0;
  logic tack_valid = 0;
  ns_time_t tack_time = '0;
  logic rd_req, smp_valid, out_valid, out_sop, out_eop, out_ready, busy;
  blk_id_t rd_block;
  logic [5:0] rd_ch;
  logic [11:0] smp_data;
  logic [7:0] out_data;
  logic [15:0] n_events, n_dropped;
  int checks = 0, failures = 0;

  fee_readout #(.N_CH(NCH), .N_RD_BLK(NBLK), .PRE_BLK(PRE), .MOD_ID(8'd7)) dut (.*);
  t7_digitizer_model #(.LAT(3), .MOD(0)) u_dig (.clk, .rst_n, .rd_req, .rd_block, .rd_ch, .smp_valid, .smp_data);

  always #2 clk = ~clk;
  initial begin : watchdog
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // block of window w from the write counters: group 1 starts at 510,
  // group 2 at 1, each +2 before its write, windows alternate groups
  function automatic int block_model(longint w);
    int a1 = 510, a2 = 1;
    int b = 0;
    for (longint k = 0; k <= w % 512 + 512; k++) begin
      if (k % 2 == 0) begin a1 = (a1 + 2) % 512; b = a1; end
      else            begin a2 = (a2 + 2) % 512; b = a2; end
    end
    return b;   // the pattern repeats every 512 windows
  endfunction

  // expected byte stream of one event
  byte exp_q[$];
  task automatic build_expected(longint t, int ev);
    longint w0 = t / 32 - PRE;
    int b0 = block_model(w0);
    for (int c = 0; c < NCH; c++) begin
      exp_q.push_back(8'd7);
      exp_q.push_back(8'(c));
      exp_q.push_back(8'(b0 >> 8));
      exp_q.push_back(8'(b0));
      exp_q.push_back(8'(ev));
      for (int j = 0; j < NBLK; j++) begin
        int b = block_model(w0 + j);
        for (int smp_i = 0; smp_i < 32; smp_i++) begin
          logic [11:0] v = u_dig.value(0, b, c, smp_i);
          exp_q.push_back(8'(v >> 8));
          exp_q.push_back(8'(v));
        end
      end
    end
  endtask

  int nbytes = 0, rec_len = 0, n_rec = 0;
  always @(posedge clk) if (rst_n) out_ready <= ($urandom % 4) != 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    byte e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected byte"); end
    else begin
      e = exp_q.pop_front();
      if (out_data != e) begin
        failures++; if (failures < 8) $display("FAIL byte %0d: %h exp %h", nbytes, out_data, e);
      end
    end
    if (out_sop != (rec_len == 0)) begin failures++; $display("FAIL sop"); end
    rec_len++;
    nbytes++;
    if (out_eop) begin
      checks++;
      if (rec_len != record_bytes(NBLK)) begin failures++; $display("FAIL record length %0d", rec_len); end
      rec_len = 0; n_rec++;
    end
  end

  initial begin
    longint t;
    out_ready = 0;
    #10 rst_n = 1;
    for (int ev = 0; ev < 6; ev++) begin
      t = ev == 0 ? 64'd40 : longint'({$urandom % 4, $urandom});   // include a wrap of the storage
      build_expected(t, ev);
      @(negedge clk) begin tack_valid = 1; tack_time = ns_time_t'(t); end
      @(negedge clk) tack_valid = 0;
      if (ev == 2) begin
        // a second TACK during the readout is ignored
        repeat (50) @(negedge clk);
        tack_valid = 1; tack_time = 64'd999;
        @(negedge clk) tack_valid = 0;
      end
      wait (!busy);
      repeat (5) @(posedge clk);
    end
    checks += 4;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d bytes missing", exp_q.size()); end
    if (n_rec != 6 * NCH) begin failures++; $display("FAIL records %0d", n_rec); end
    if (n_dropped != 1) begin failures++; $display("FAIL dropped %0d", n_dropped); end
    if (n_events != 6) begin failures++; $display("FAIL events %0d", n_events); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
