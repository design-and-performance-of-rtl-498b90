// tb_t7_timing_gen: checks the six TARGET7 control signals against the
// optimized edge table, ns by ns over several 64 ns cycles, the ordering
// rules the sampling scheme needs (each STRB inside the 18 ns window in which
// its whole group holds; Incr before STRB), and a change of settings on sync.
// cfg_ok must accept both tables and reject settings that break a rule:
// STRB1 starting before group 1 fully holds, Incr1 ending after STRB1
// starts, and STRB2 running past the end of group 2's holding window.
module tb_t7_timing_gen;
  logic clk_1g = 0, rst_n = 0, sync = 0;
  logic [5:0] cfg_le [6], cfg_te [6];
  logic sstin, sspin, incr1, strb1, incr2, strb2;
  logic [5:0] phase;
  logic cfg_ok;
  int checks = 0, failures = 0;

  t7_timing_gen dut (.*);
  always #0.5 clk_1g = ~clk_1g;

  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ns at which each signal is high, written out from the table
  // (SSTin 0-32, SSPin 50-3, Incr1 3-18, STRB1 32-39, Incr2 35-50, STRB2 0-7)
  function automatic logic [5:0] expect_at(int t, int which_set);
    logic [5:0] e;
    if (which_set == 0) begin
      e[0] = t < 32;
      e[1] = t >= 50 || t < 3;
      e[2] = t >= 3 && t < 18;
      e[3] = t >= 32 && t < 39;
      e[4] = t >= 35 && t < 50;
      e[5] = t < 7;
    end else begin // alternative settings used after the second sync
      e[0] = t < 32;
      e[1] = t >= 48 || t < 2;
      e[2] = t >= 4 && t < 20;
      e[3] = t >= 33 && t < 41;
      e[4] = t >= 36 && t < 52;
      e[5] = t >= 1 && t < 9;
    end
    return e;
  endfunction

  task automatic run(int cycles, int which_set);
    int first_strb1 = -1, last_strb1 = -1, incr1_le = -1;
    for (int t = 0; t < 64 * cycles; t++) begin
      logic [5:0] got, ex;
      @(posedge clk_1g); #0.1;
      got = {strb2, incr2, strb1, incr1, sspin, sstin};
      ex  = expect_at(t % 64, which_set);
      checks++;
      if (got !== ex || phase != 6'(t % 64)) begin
        failures++;
        if (failures < 6) $display("FAIL set %0d t=%0d got %b exp %b", which_set, t, got, ex);
      end
      if (t < 64) begin
        if (strb1 && first_strb1 < 0) first_strb1 = t;
        if (strb1) last_strb1 = t;
        if (incr1 && incr1_le < 0) incr1_le = t;
      end
    end
    // Group 1 (capacitors 0..31) all hold from ns 31 (SSTin reaches cap 31)
    // until ns 50 (SSPin reaches cap 0): STRB1 must fit in that window.
    if (which_set == 0) begin
      checks += 2;
      if (!(first_strb1 >= 31 && last_strb1 < 50)) begin failures++; $display("FAIL STRB1 outside hold window"); end
      if (!(incr1_le >= 0 && incr1_le < first_strb1)) begin failures++; $display("FAIL Incr1 not before STRB1"); end
    end
  endtask

  initial begin
    cfg_le = '{6'd0, 6'd50, 6'd3, 6'd32, 6'd35, 6'd0};
    cfg_te = '{6'd32, 6'd3, 6'd18, 6'd39, 6'd50, 6'd7};
    #3.2 rst_n = 1;          // first edge after reset is phase 0
    run(4, 0);
    checks++; if (!cfg_ok) begin failures++; $display("FAIL cfg_ok, optimized table"); end
    // new settings take effect on sync
    @(negedge clk_1g);
    cfg_le = '{6'd0, 6'd48, 6'd4, 6'd33, 6'd36, 6'd1};
    cfg_te = '{6'd32, 6'd2, 6'd20, 6'd41, 6'd52, 6'd9};
    sync = 1;
    @(negedge clk_1g) sync = 0;
    #(-0.0);
    // the edge where sync was sampled produced phase 0 already
    begin
      logic [5:0] got;
      got = {strb2, incr2, strb1, incr1, sspin, sstin};
      checks++;
      if (phase != 0 || got !== expect_at(0, 1)) begin failures++; $display("FAIL phase 0 after sync"); end
    end
    begin
      for (int t = 1; t < 64 * 3; t++) begin
        logic [5:0] got;
        @(posedge clk_1g); #0.1;
        got = {strb2, incr2, strb1, incr1, sspin, sstin};
        checks++;
        if (got !== expect_at(t % 64, 1)) begin
          failures++; if (failures < 10) $display("FAIL set 1 t=%0d", t);
        end
      end
    end
    checks++; if (!cfg_ok) begin failures++; $display("FAIL cfg_ok, second table"); end
    // settings that break a rule, each loaded with a sync
    for (int k = 0; k < 3; k++) begin
      @(negedge clk_1g);
      cfg_le = '{6'd0, 6'd50, 6'd3, 6'd32, 6'd35, 6'd0};
      cfg_te = '{6'd32, 6'd3, 6'd18, 6'd39, 6'd50, 6'd7};
      case (k)
        0: cfg_le[3] = 6'd28;    // STRB1 before capacitor 31 holds
        1: cfg_te[2] = 6'd34;    // Incr1 still high when STRB1 starts
        2: cfg_te[5] = 6'd20;    // STRB2 past SSPin reaching group 2
        default: ;
      endcase
      sync = 1;
      @(negedge clk_1g) sync = 0;
      checks++;
      if (cfg_ok) begin failures++; $display("FAIL cfg_ok accepts bad settings %0d", k); end
    end
    // back to the table
    @(negedge clk_1g);
    cfg_le = '{6'd0, 6'd50, 6'd3, 6'd32, 6'd35, 6'd0};
    cfg_te = '{6'd32, 6'd3, 6'd18, 6'd39, 6'd50, 6'd7};
    sync = 1;
    @(negedge clk_1g) sync = 0;
    checks++; if (!cfg_ok) begin failures++; $display("FAIL cfg_ok after restore"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
