// ns_timer: 64-bit nanosecond time counter.
//
// The backplane and every front-end module keep a common absolute time in
// units of 1 ns. This counter advances by STEP_NS (the clock period in ns) on
// every clock edge, so time_ns is the time of the most recent edge. A SYNC
// strobe loads sync_value on the next edge, which is how all counters of the
// camera are set to the same value. Reset clears the counter.
//
// Interface: one-cycle sync strobe with a 64-bit value; time_ns is registered.
// The 64-bit 1 ns time and SYNC-on-next-edge behaviour follow the camera
// description; the strobe-plus-value form of the SYNC message is assumed.
module ns_timer
  import sct_pkg::*;
#(
  parameter int unsigned STEP_NS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     sync,
  input  ns_time_t sync_value,
  output ns_time_t time_ns
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    time_ns <= '0;
    else if (sync) time_ns <= sync_value;
    else           time_ns <= time_ns + ns_time_t'(STEP_NS);
  end
endmodule
