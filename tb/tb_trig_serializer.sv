// tb_trig_serializer: random trigger records, some arriving while a record
// is still being sent. A receiver in the testbench rebuilds each record from
// the word stream (start word with tx_k, 4 time words MSW first, 25 pattern
// words LSW first) and compares it with the accepted inputs; dropped records
// must match the n_dropped count.
module tb_trig_serializer;
  import sct_pkg::*;
  localparam int NB = 400;
  localparam int PW = (NB + 15) / 16;
  logic clk = 0, rst_n = 0, in_valid = 0;
  ns_time_t in_time = '0;
  logic [NB-1:0] in_pattern = '0;
  logic tx_valid, tx_k;
  logic [15:0] tx_word, n_dropped;
  int checks = 0, failures = 0;

  trig_serializer #(.N_BITS(NB)) dut (.*);
  always #2 clk = ~clk;
  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  ns_time_t      q_time[$];
  logic [NB-1:0] q_pat[$];
  int n_drop_exp = 0, busy = 0, n_rx = 0;

  initial begin
    #5 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int gap;
      gap = int'($urandom % 45);
      repeat (gap) @(negedge clk) begin
        in_valid = 0;
        if (busy > 0) busy--;
      end
      @(negedge clk);
      in_valid = 1;
      in_time = {$urandom, $urandom};
      for (int w = 0; w < NB; w += 32) in_pattern[w +: 32] = $urandom;
      if (busy == 0) begin q_time.push_back(in_time); q_pat.push_back(in_pattern); busy = 1 + 4 + PW; end
      else begin n_drop_exp++; busy--; end
    end
    @(negedge clk) in_valid = 0;
    repeat (80) @(negedge clk);
    checks++;
    if (int'(n_dropped) != n_drop_exp || q_time.size() != 0) begin
      failures++; $display("FAIL dropped %0d exp %0d, %0d records unsent", n_dropped, n_drop_exp, q_time.size());
    end
    $display("records=%0d dropped=%0d", n_rx, n_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  int widx = -1;
  logic [63:0] r_time;
  logic [16*PW-1:0] r_pat;
  always @(posedge clk) if (rst_n && tx_valid) begin
    if (tx_k) begin
      checks++;
      if (tx_word != 16'hBC50 || widx != -1) begin failures++; $display("FAIL start word %h idx %0d", tx_word, widx); end
      widx = 0;
    end else if (widx >= 0 && widx < 4) begin
      r_time = {r_time[47:0], tx_word}; widx++;
    end else if (widx >= 4) begin
      r_pat[16*(widx-4) +: 16] = tx_word; widx++;
      if (widx == 4 + PW) begin
        checks++; n_rx++;
        if (q_time.size() == 0 || r_time != q_time[0] || r_pat[NB-1:0] != q_pat[0]) begin
          failures++; $display("FAIL record %0d mismatch", n_rx);
        end
        if (q_time.size() != 0) begin void'(q_time.pop_front()); void'(q_pat.pop_front()); end
        widx = -1;
      end
    end else begin
      failures++; $display("FAIL word outside frame");
    end
  end
endmodule
