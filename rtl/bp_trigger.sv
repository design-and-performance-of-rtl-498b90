// bp_trigger: trigger logic of the backplane trigger FPGA (TFPGA) of one sector.
//
// Inputs are the 16 module triggers of each of N_MOD modules (about 10 ns long
// pulses from the front-end trigger circuits). They are masked with the
// per-channel enables, placed on the sector's trigger-pixel grid (module pixel
// map and alternating 180-degree module orientation, see sct_pkg) and fed to
// four identical coincidence pipelines (coinc3) clocked by clk_ph[0..3], four
// copies of the 250 MHz clock offset by 0, 1, 2 and 3 ns (pipelines A..D).
// Sampling each input every nanosecond is what lets two pulses that overlap
// by about 1.5 ns form a coincidence even though the logic runs at 4 ns.
//
// Back in the clk_ph[0] domain the four results of one 4 ns window are
// collected. If any pipeline reports three adjacent hit pixels and the dead
// time has expired, a backplane trigger is issued: bp_trig pulses for one
// cycle, trig_time carries the 1 ns time stamp (window start plus the index
// of the first pipeline that fired) and trig_pattern the hit pattern that
// pipeline sampled (module-major order, m*16 + trigger pixel). The trigger
// pulse also serves as the TACK to the modules. After a trigger, further
// coincidences are ignored for DEADTIME_CYC cycles (200 us at 250 MHz) and
// counted in n_vetoed.
//
// Timing: a pulse sampled in window k (ns 4k..4k+3 of clk_ph[0]) produces
// bp_trig at the clk_ph[0] edge 4(k+3). time_now must be the 1 ns time of the
// latest clk_ph[0] edge (ns_timer with STEP_NS = 4).
//
// From the camera description: 400 inputs, 3-adjacent rule with diagonal
// neighbours, four pipelines at 1 ns offsets, OR of the pipelines, 1 ns time
// stamp from the first pipeline, latched hit pattern, 200 us dead time.
// Own choices: the module placement on the grid, the retiming into the
// clk_ph[0] domain and placing the dead time here.
module bp_trigger
  import sct_pkg::*;
#(
  parameter int unsigned N_MOD        = 25,
  parameter int unsigned DEADTIME_CYC = 50000
) (
  input  logic [3:0]                clk_ph,
  input  logic                      rst_n,
  input  logic [N_MOD*TP_PER_MOD-1:0] mod_trig,
  input  logic [N_MOD*TP_PER_MOD-1:0] trig_en,
  input  ns_time_t                  time_now,
  output logic                      bp_trig,
  output ns_time_t                  trig_time,
  output logic [N_MOD*TP_PER_MOD-1:0] trig_pattern,
  output logic [31:0]               n_trig,
  output logic [31:0]               n_vetoed
);
  localparam int unsigned MSIDE  = (N_MOD >= 25) ? 5 : (N_MOD >= 9) ? 3 : (N_MOD >= 4) ? 2 : 1;
  localparam int unsigned GX     = MSIDE * TP_PER_SIDE;
  localparam int unsigned GY     = ((N_MOD + MSIDE - 1) / MSIDE) * TP_PER_SIDE;
  localparam int unsigned NG     = GX * GY;

  // ---- placement of module triggers on the grid ----
  function automatic int unsigned gidx(int unsigned m, int unsigned tp);
    int unsigned col = m % MSIDE;
    int unsigned row = m / MSIDE;
    int unsigned lx  = tp_local_x(tp);
    int unsigned ly  = tp_local_y(tp);
    if (col % 2 == 1) begin
      lx = TP_PER_SIDE - 1 - lx;
      ly = TP_PER_SIDE - 1 - ly;
    end
    return (row * TP_PER_SIDE + ly) * GX + col * TP_PER_SIDE + lx;
  endfunction

  logic [NG-1:0] grid;
  always_comb begin
    grid = '0;
    for (int unsigned m = 0; m < N_MOD; m++)
      for (int unsigned tp = 0; tp < TP_PER_MOD; tp++)
        grid[gidx(m, tp)] = mod_trig[m*TP_PER_MOD + tp] & trig_en[m*TP_PER_MOD + tp];
  end

  // ---- four phase pipelines ----
  logic [3:0]    ph_coinc;
  logic [NG-1:0] ph_pat [4];

  for (genvar p = 0; p < 4; p++) begin : g_pipe
    logic [NG-1:0] unused_map;
    coinc3 #(.GRID_X(GX), .GRID_Y(GY)) u_coinc (
      .clk      (clk_ph[p]),
      .rst_n    (rst_n),
      .hits     (grid),
      .pattern  (ph_pat[p]),
      .coinc_map(unused_map),
      .coinc    (ph_coinc[p])
    );
  end

  // ---- collect one 4 ns window in the clk_ph[0] domain ----
  logic          clk;
  assign clk = clk_ph[0];

  logic [3:0]    win_hit;
  logic [NG-1:0] win_pat [4];
  ns_time_t      win_time;     // time of the clk_ph[0] edge that opened the window

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_hit  <= '0;
      win_time <= '0;
      for (int p = 0; p < 4; p++) win_pat[p] <= '0;
    end else begin
      win_hit  <= ph_coinc;
      win_time <= time_now - ns_time_t'(4);
      for (int p = 0; p < 4; p++) win_pat[p] <= ph_pat[p];
    end
  end

  // first pipeline (A..D) that fired in the window
  logic [1:0] first_ph;
  always_comb begin
    first_ph = 2'd0;
    for (int p = 3; p >= 0; p--)
      if (win_hit[p]) first_ph = 2'(p);
  end

  // ---- dead time and trigger output ----
  localparam int unsigned DTW = (DEADTIME_CYC > 1) ? $clog2(DEADTIME_CYC + 1) : 1;
  logic [DTW-1:0] dead_cnt;
  logic           fire;
  assign fire = (|win_hit) && (dead_cnt == '0);

  logic [NG-1:0] sel_pat;
  assign sel_pat = win_pat[first_ph];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bp_trig      <= 1'b0;
      trig_time    <= '0;
      trig_pattern <= '0;
      dead_cnt     <= '0;
      n_trig       <= '0;
      n_vetoed     <= '0;
    end else begin
      bp_trig <= fire;
      if (dead_cnt != '0) dead_cnt <= dead_cnt - 1'b1;
      if (fire) begin
        trig_time <= win_time + ns_time_t'(first_ph);
        for (int unsigned m = 0; m < N_MOD; m++)
          for (int unsigned tp = 0; tp < TP_PER_MOD; tp++)
            trig_pattern[m*TP_PER_MOD + tp] <= sel_pat[gidx(m, tp)];
        dead_cnt <= DTW'(DEADTIME_CYC);
        n_trig   <= n_trig + 1;
      end else if (|win_hit) begin
        n_vetoed <= n_vetoed + 1;
      end
    end
  end

endmodule
