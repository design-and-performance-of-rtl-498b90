// tb_sipm_bias_guard: writes trim codes (including out-of-range ones), then
// raises the group currents until the module total reaches 128 mA. Checks
// the clamp at 4000 mV, the current sum with the 50 mA per-group
// saturation, the trip one cycle after the limit (module off, all trims 0)
// and that clear restores the stored codes once the current is back down.
module tb_sipm_bias_guard;
  logic clk = 0, rst_n = 0, wr_en = 0, clear = 0;
  logic [3:0] wr_grp = 0;
  logic [11:0] wr_code = 0;
  logic [15:0] i_grp [16];
  logic [11:0] trim_code [16];
  logic module_on, tripped;
  logic [19:0] i_sum;
  int checks = 0, failures = 0;
  int stored [16];

  sipm_bias_guard dut (.*);
  always #2 clk = ~clk;
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int sum;
    foreach (i_grp[g]) i_grp[g] = 0;
    #5 rst_n = 1;
    for (int g = 0; g < 16; g++) begin
      int c;
      c = (g == 5) ? 4095 : int'($urandom % 4001);
      stored[g] = (c > 4000) ? 4000 : c;
      @(negedge clk) begin wr_en = 1; wr_grp = 4'(g); wr_code = 12'(c); end
    end
    @(negedge clk) wr_en = 0;
    @(negedge clk);
    foreach (trim_code[g]) chk(int'(trim_code[g]) == stored[g], $sformatf("trim %0d", g));
    chk(module_on && !tripped, "on after writes");
    // currents below the limit, one group above 50 mA (saturates)
    for (int step = 0; step < 40; step++) begin
      sum = 0;
      @(negedge clk);
      foreach (i_grp[g]) begin
        i_grp[g] = 16'(step * 220 + g * 10);
        if (g == 0) i_grp[g] = 16'd60000;
        sum += (int'(i_grp[g]) > 50000) ? 50000 : int'(i_grp[g]);
      end
      @(posedge clk); #0.1;
      chk(int'(i_sum) == sum, $sformatf("sum step %0d", step));
      if (sum >= 128000) begin
        chk(tripped && !module_on, "trip at limit");
        foreach (trim_code[g]) chk(trim_code[g] == 0, "trims zero");
        break;
      end else begin
        chk(!tripped, $sformatf("no trip below limit (%0d uA)", sum));
      end
    end
    chk(tripped, "limit reached in test");
    // clear while still high: stays tripped
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    chk(tripped, "clear ignored while over limit");
    foreach (i_grp[g]) i_grp[g] = 16'd1000;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    @(negedge clk);
    chk(!tripped && module_on, "cleared");
    foreach (trim_code[g]) chk(int'(trim_code[g]) == stored[g], "trims restored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
