// coinc3: one coincidence pipeline of the backplane trigger.
//
// Looks for three adjacent trigger pixels that are hit at the same time on a
// GRID_X x GRID_Y grid, where adjacency includes the diagonals (up to eight
// neighbours). A connected group of three pixels always contains one pixel
// that touches the other two, so the test per pixel is: the pixel is hit and
// at least two of its eight neighbours are hit. coinc_map marks those centre
// pixels, coinc is their OR.
//
// Timing: stage 1 latches the raw inputs on the clock edge (this is the phase
// sampling of the trigger inputs); stage 2 registers the result, so coinc is
// valid two edges after the inputs were sampled, together with
// pattern, the input sample it was computed from. The backplane runs four
// copies of this module on clocks 1 ns apart.
//
// The 3-adjacent rule and the 8-neighbour adjacency follow the camera
// description; the two-stage pipelining is this design's choice.
module coinc3 #(
  parameter int unsigned GRID_X = 20,
  parameter int unsigned GRID_Y = 20
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [GRID_Y*GRID_X-1:0] hits,       // index y*GRID_X + x
  output logic [GRID_Y*GRID_X-1:0] pattern,    // sampled inputs, aligned with coinc
  output logic [GRID_Y*GRID_X-1:0] coinc_map,  // centre pixels of 3-adjacent groups
  output logic                     coinc
);
  localparam int unsigned N = GRID_Y * GRID_X;

  logic [N-1:0] latched;
  logic [N-1:0] map_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) latched <= '0;
    else        latched <= hits;
  end

  // inputs on a grid with a border of zeros, so every pixel has 8 neighbours
  localparam int unsigned PX = GRID_X + 2;
  logic [(GRID_Y+2)*PX-1:0] padded;
  always_comb begin
    padded = '0;
    for (int unsigned y = 0; y < GRID_Y; y++)
      padded[(y + 1) * PX + 1 +: GRID_X] = latched[y * GRID_X +: GRID_X];
  end

  for (genvar y = 0; y < int'(GRID_Y); y++) begin : g_y
    for (genvar x = 0; x < int'(GRID_X); x++) begin : g_x
      localparam int unsigned C = (y + 1) * PX + (x + 1);   // centre in padded
      logic [7:0] nb;
      logic [3:0] cnt;
      assign nb  = {padded[C - PX - 1], padded[C - PX], padded[C - PX + 1],
                    padded[C - 1],                      padded[C + 1],
                    padded[C + PX - 1], padded[C + PX], padded[C + PX + 1]};
      assign cnt = 4'(nb[0]) + 4'(nb[1]) + 4'(nb[2]) + 4'(nb[3]) +
                   4'(nb[4]) + 4'(nb[5]) + 4'(nb[6]) + 4'(nb[7]);
      assign map_d[y * GRID_X + x] = latched[y * GRID_X + x] && (cnt >= 4'd2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coinc_map <= '0;
      pattern   <= '0;
      coinc     <= 1'b0;
    end else begin
      coinc_map <= map_d;
      pattern   <= latched;
      coinc     <= |map_d;
    end
  end

endmodule
