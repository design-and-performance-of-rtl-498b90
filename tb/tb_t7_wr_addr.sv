// tb_t7_wr_addr: drives Incr/STRB pulses with the optimized timing (own
// generator) and checks the storage write order over more than one full turn
// of the 512 blocks: the k-th 32 ns window after sync must go to block k
// (k even) or k+2 (k odd), modulo 512, i.e. 0,3,2,5,4,7,... Group 1 must
// write only even blocks, group 2 only odd ones.
module tb_t7_wr_addr;
  import sct_pkg::*;
  logic clk_1g = 0, rst_n = 0, sync = 0;
  logic incr1 = 0, incr2 = 0, strb1 = 0, strb2 = 0;
  blk_id_t wr_addr1, wr_addr2, wr_block;
  logic wr_valid, wr_group;
  int checks = 0, failures = 0;

  t7_wr_addr dut (.*);
  always #0.5 clk_1g = ~clk_1g;

  initial begin : watchdog
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ph = 0;
  bit run = 0;
  always @(posedge clk_1g) if (run) begin
    incr1 <= (ph >= 3 && ph < 18);
    strb1 <= (ph >= 32 && ph < 39);
    incr2 <= (ph >= 35 && ph < 50);
    strb2 <= (ph < 7);
    ph <= (ph + 1) % 64;
  end

  int win = 0;
  bit first = 1;
  always @(posedge clk_1g) if (wr_valid) begin
    if (first && wr_group) begin
      // the group 2 transfer right after sync holds the pre-sync window
      first = 0;
    end else begin
      int exp_b;
      first = 0;
      exp_b = (win % 2 == 0) ? win % 512 : (win + 2) % 512;
      checks += 2;
      if (int'(wr_block) != exp_b) begin
        failures++; if (failures < 6) $display("FAIL window %0d block %0d exp %0d", win, wr_block, exp_b);
      end
      if (wr_group != wr_block[0] || wr_group != 1'(win % 2)) begin failures++; $display("FAIL group parity"); end
      win++;
    end
  end

  initial begin
    #2.2 rst_n = 1;
    @(negedge clk_1g) sync = 1;
    @(negedge clk_1g) begin sync = 0; run = 1; end
    wait (win == 700);
    // sync restarts the sequence
    @(negedge clk_1g) begin run = 0; sync = 1; end
    @(negedge clk_1g) begin sync = 0; end
    {incr1, incr2, strb1, strb2} = '0;
    @(negedge clk_1g);
    checks++;
    if (wr_addr1 != 9'd510 || wr_addr2 != 9'd1) begin failures++; $display("FAIL addresses after sync"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
