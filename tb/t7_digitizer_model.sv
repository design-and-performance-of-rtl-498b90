// t7_digitizer_model: behavioural stand-in for the TARGET7 digitizer side,
// used by the testbenches. On rd_req it returns, after LAT cycles, the 32
// samples of block rd_block of channel rd_ch on consecutive cycles. The
// sample values are a fixed function of (module, block, channel, smp_i), so
// a checker can recompute them without storing waveforms:
//   value = (mod*401 + block*37 + ch*11 + smp_i*5) mod 4096.
module t7_digitizer_model #(
  parameter int LAT = 3,
  parameter int MOD = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req,
  input  logic [8:0]  rd_block,
  input  logic [5:0]  rd_ch,
  output logic        smp_valid,
  output logic [11:0] smp_data
);
  int cnt = -1;
  int wait_c = 0;
  int blk = 0, ch = 0;
  initial begin smp_valid = 0; smp_data = 0; end

  function automatic logic [11:0] value(int m, int b, int c, int smp_i);
    return 12'((m * 401 + b * 37 + c * 11 + smp_i * 5) % 4096);
  endfunction

  always @(posedge clk) begin
    smp_valid <= 1'b0;
    if (!rst_n) begin
      cnt = -1;
    end else if (rd_req) begin
      blk = int'(rd_block); ch = int'(rd_ch); wait_c = LAT; cnt = 0;
    end else if (cnt >= 0) begin
      if (wait_c > 0) wait_c--;
      else begin
        smp_valid <= 1'b1;
        smp_data  <= value(MOD, blk, ch, cnt);
        cnt++;
        if (cnt == 32) cnt = -1;
      end
    end
  end
endmodule
