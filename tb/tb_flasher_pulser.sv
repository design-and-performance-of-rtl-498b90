// tb_flasher_pulser: TTL triggers of various lengths; checks that each
// rising edge gives exactly one pulse of WIDTH cycles (shorter if the
// trigger is shorter), only on the enabled LEDs, one cycle after the edge.
module tb_flasher_pulser;
  localparam int W = 4;
  logic clk = 0, rst_n = 0, trig_in = 0;
  logic [9:0] led_en = '0, led;
  int checks = 0, failures = 0;

  flasher_pulser #(.N_LED(10), .WIDTH(W)) dut (.*);
  always #2 clk = ~clk;
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #5 rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int len, hi;
      len = 1 + int'($urandom % 10);
      led_en = 10'($urandom);
      @(negedge clk) trig_in = 1;
      hi = 0;
      for (int c = 0; c < len + W + 3; c++) begin
        @(negedge clk);
        if (c == len - 1) trig_in = 0;
        checks++;
        // cycle c after the edge: expected high for c < min(len, W)
        if (led !== ((c < ((len < W) ? len : W)) ? led_en : 10'd0)) begin
          failures++; if (failures < 6) $display("FAIL n=%0d c=%0d len=%0d led=%b en=%b", n, c, len, led, led_en);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
