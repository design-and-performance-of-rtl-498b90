// tb_ns_timer: checks that the 1 ns counter advances by STEP_NS per clock,
// loads the SYNC value on the next edge and continues from it.
module tb_ns_timer;
  import sct_pkg::*;
  logic clk = 0, rst_n = 0, sync = 0;
  ns_time_t sync_value = '0, time_ns;
  int checks = 0, failures = 0;
  longint unsigned model;

  ns_timer #(.STEP_NS(4)) dut (.*);
  always #2 clk = ~clk;

  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    model = 4;   // the edge at 6 ns, right after reset release, gives 4
    #5 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      sync = ($urandom % 50) == 0;
      sync_value = {$urandom, $urandom};
      @(posedge clk); #0.1;
      model = sync ? sync_value : model + 4;
      checks++;
      if (time_ns != model) begin
        failures++; if (failures < 5) $display("FAIL cycle %0d: %0d vs %0d", i, time_ns, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
