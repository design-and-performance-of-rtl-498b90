// tb_gps_ttag: PPS every 1000 cycles (scaled second) and random pulses;
// checks that each rising pulse edge gives one tag with the seconds counted
// so far and the ns since the last PPS, computed by the testbench.
module tb_gps_ttag;
  logic clk = 0, rst_n = 0, pps = 0, pulse = 0;
  logic tag_valid;
  logic [31:0] tag_sec, n_tags;
  logic [29:0] tag_ns;
  int checks = 0, failures = 0;

  gps_ttag #(.NS_PER_CLK(8)) dut (.*);
  always #4 clk = ~clk;
  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int sec = 0, ns = 0, n_exp = 0;
  logic pps_prev = 0, pulse_prev = 0;
  int exp_sec[$], exp_ns[$];
  initial begin
    #10 rst_n = 1;
    @(negedge clk); ns = 16;
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      pps   = (c % 1000) == 999;
      pulse = ($urandom % 37) == 0 ? ~pulse : pulse;
      // model of the edge that follows: values before the update
      if (pulse && !pulse_prev) begin exp_sec.push_back(sec); exp_ns.push_back(ns); n_exp++; end
      if (pps && !pps_prev) begin sec++; ns = 0; end else ns += 8;
      pps_prev = pps; pulse_prev = pulse;
    end
    repeat (2) @(posedge clk);
    checks++;
    if (int'(n_tags) != n_exp || exp_sec.size() != 0) begin
      failures++; $display("FAIL tags %0d expected %0d, %0d unmatched", n_tags, n_exp, exp_sec.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && tag_valid) begin
    checks++;
    if (exp_sec.size() == 0) begin failures++; $display("FAIL extra tag at %0t sec=%0d ns=%0d", $time, tag_sec, tag_ns); end
    else begin
      int s, n;
      s = exp_sec.pop_front(); n = exp_ns.pop_front();
      if (int'(tag_sec) != s || int'(tag_ns) != n) begin
        failures++; if (failures < 5) $display("FAIL tag %0d.%0d exp %0d.%0d", tag_sec, tag_ns, s, n);
      end
    end
  end
endmodule
