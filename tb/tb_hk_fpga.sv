// tb_hk_fpga: SPI master in the testbench. Writes and reads back every
// read/write register, checks the trigger enables and SYNC value outputs,
// the one-cycle SYNC pulse, the read-only trigger counter, and power
// sequencing: requested modules come on one at a time, SEQ_GAP cycles
// apart, lowest number first, and go off at once when the request is
// cleared. Monitor readings are read through the select register, with
// the 16-bit value latched when its low byte is read.
module tb_hk_fpga;
  import sct_pkg::*;
  localparam int NM  = 25;
  localparam int GAP = 40;
  localparam int NTP = NM * TP_PER_MOD;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0;
  logic miso, sync;
  logic [NM-1:0] mod_pwr;
  logic [1:0] dacq_pwr;
  logic [NTP-1:0] trig_en;
  ns_time_t sync_value;
  logic [31:0] n_trig = 32'hA5C3_1E07;
  localparam int NMON = 2 * NM + 3;
  logic [15:0] mon_value [NMON];
  int checks = 0, failures = 0;
  int n_sync = 0;

  hk_fpga #(.N_MOD(NM), .SEQ_GAP(GAP)) dut (.*);
  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n && sync) n_sync++;
  initial begin : watchdog
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // one 16-bit mode-0 frame, SCLK half period 20 ns
  task automatic spi(input bit rd, input int a, input logic [7:0] d, output logic [7:0] q);
    logic [15:0] f;
    f = {rd, 7'(a), d};
    q = '0;
    cs_n = 0; #40;
    for (int i = 15; i >= 0; i--) begin
      mosi = f[i]; #20;
      sclk = 1;
      if (i < 8) q = {q[6:0], miso};
      #20; sclk = 0;
    end
    #40; cs_n = 1; #80;
  endtask

  logic [7:0] q;
  logic [7:0] ten [50];
  logic [63:0] sv;
  initial begin
    #10 rst_n = 1;
    #100;
    chk(mod_pwr == 0 && dacq_pwr == 0 && trig_en == 0, "off after reset");
    // monitor readings
    foreach (mon_value[i]) mon_value[i] = 16'($urandom);
    for (int i = 0; i < NMON; i++) begin
      logic [15:0] v;
      logic [7:0] lo;
      spi(0, 6, 8'(i), q);
      spi(1, 6, 0, q);
      chk(q == 8'(i), "monitor select readback");
      v = mon_value[i];
      spi(1, 24, 0, lo);
      mon_value[i] = ~mon_value[i];    // changes after the low byte: high byte must be the latched one
      spi(1, 25, 0, q);
      chk({q, lo} == v, $sformatf("monitor %0d read %h exp %h", i, {q, lo}, v));
    end
    // DACQ power
    spi(0, 4, 8'h03, q); spi(1, 4, 0, q);
    chk(dacq_pwr == 2'b11 && q == 8'h03, "dacq power");
    // trigger enables
    for (int k = 0; k < 50; k++) begin ten[k] = 8'($urandom); spi(0, 32 + k, ten[k], q); end
    for (int k = 0; k < 50; k++) begin
      spi(1, 32 + k, 0, q);
      chk(q == ten[k], $sformatf("trig_en readback %0d", k));
      chk(trig_en[8*k +: 8] == ten[k], $sformatf("trig_en out %0d", k));
    end
    // trigger counter
    for (int k = 0; k < 4; k++) begin spi(1, 16 + k, 0, q); chk(q == n_trig[8*k +: 8], "n_trig read"); end
    // SYNC value and command
    sv = {$urandom, $urandom} & ~64'h3F;
    for (int k = 0; k < 8; k++) spi(0, 8 + k, sv[8*k +: 8], q);
    for (int k = 0; k < 8; k++) begin spi(1, 8 + k, 0, q); chk(q == sv[8*k +: 8], "sync value read"); end
    chk(sync_value == sv, "sync value out");
    chk(n_sync == 0, "no sync before command");
    spi(0, 5, 0, q);
    chk(n_sync == 1, "one sync pulse");
    // power sequencing: request modules 3, 7, 24 and 12 in one go
    begin
      logic [31:0] req;
      int t_on [NM];
      int order [$];
      req = (32'd1 << 3) | (32'd1 << 7) | (32'd1 << 24) | (32'd1 << 12);
      foreach (t_on[m]) t_on[m] = -1;
      fork
        begin
          for (int k = 0; k < 4; k++) spi(0, k, req[8*k +: 8], q);
        end
        begin
          for (int c = 0; c < 20 * GAP; c++) begin
            @(posedge clk); #0.1;
            for (int m = 0; m < NM; m++)
              if (mod_pwr[m] && t_on[m] < 0) begin t_on[m] = c; order.push_back(m); end
          end
        end
      join
      chk(order.size() == 4, "four modules on");
      chk(order.size() == 4 && order[0] == 3 && order[1] == 7 && order[2] == 12 && order[3] == 24, "order lowest first");
      for (int i = 1; i < order.size(); i++)
        // modules 3 and 7 are requested in the same byte: exactly one gap;
        // the others arrive with later SPI frames: at least one gap
        chk(i == 1 ? (t_on[order[i]] - t_on[order[i-1]] == GAP + 1)
                   : (t_on[order[i]] - t_on[order[i-1]] >= GAP + 1),
            $sformatf("gap %0d", t_on[order[i]] - t_on[order[i-1]]));
      for (int k = 0; k < 4; k++) begin spi(1, 20 + k, 0, q); chk(q == req[8*k +: 8], "power-on readback"); end
      // switch 7 off: immediate
      spi(0, 0, 8'h08, q);
      repeat (3) @(posedge clk); #0.1;
      chk(mod_pwr[7] == 0 && mod_pwr[3] == 1, "module 7 off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
