// sct_pkg: constants, types and small functions shared by the camera-sector RTL.
//
// Geometry: a sector holds 25 modules on a 5 x 5 grid; each module has 16 trigger
// pixels on a 4 x 4 grid, so the sector trigger grid is 20 x 20 = 400 inputs.
// TARGET7 storage: 512 blocks of 32 samples (16.384 us at 1 GSa/s), written in a
// ping-pong order that gives the +3/-1 block sequence 0,3,2,5,4,7,...
// Numbers taken from the camera description are marked "paper"; the rest are
// choices of this implementation.
package sct_pkg;

  // ---- geometry (paper) ----
  localparam int MOD_PER_SIDE  = 5;   // 5 x 5 modules per sector
  localparam int TP_PER_SIDE   = 4;   // 4 x 4 trigger pixels per module
  localparam int TP_PER_MOD    = 16;
  localparam int CH_PER_MOD    = 64;  // image pixels = digitizer channels
  localparam int CH_PER_ASIC   = 16;
  localparam int ASIC_PER_MOD  = 4;

  // ---- TARGET7 storage (paper) ----
  localparam int T7_BLOCKS     = 512;
  localparam int T7_BLOCK_LEN  = 32;
  localparam int T7_ROWS       = 8;   // 8 rows x 64 columns
  localparam int T7_PERIOD_NS  = 64;  // one Group-1 + Group-2 cycle

  // ---- waveform record (paper: 5-byte header, 2 bytes per sample) ----
  localparam int HDR_BYTES     = 5;
  localparam int SAMPLE_BITS   = 12;  // assumed ADC width

  typedef logic [63:0] ns_time_t;
  typedef logic [8:0]  blk_id_t;

  // Trigger acknowledge sent from the backplane to every module.
  typedef struct packed {
    logic     valid;
    ns_time_t t;
  } tack_t;

  // Position of trigger pixel tp (0..15) inside a module, per the module
  // pixel map: quadrant tp/4 (0 bottom-left, 1 bottom-right, 2 top-left,
  // 3 top-right), and the same order for tp%4 inside the quadrant.
  // x grows to the right, y grows upwards.
  function automatic int unsigned tp_local_x(int unsigned tp);
    return ((tp / 4) % 2) * 2 + (tp % 2);
  endfunction

  function automatic int unsigned tp_local_y(int unsigned tp);
    return ((tp / 4) / 2) * 2 + ((tp % 4) / 2);
  endfunction

  // Storage block that holds 32 ns window w (counted from SYNC). Group 1
  // (even windows) writes even blocks, Group 2 (odd windows) odd blocks, each
  // advanced by 2 before its write: blocks 0,3,2,5,4,7,...
  function automatic blk_id_t block_of_window(logic [63:0] w);
    logic [63:0] b;
    b = w[0] ? (w + 64'd2) : w;
    return blk_id_t'(b % 64'(T7_BLOCKS));
  endfunction

  // Record length in bytes for a readout of nblk blocks.
  function automatic int unsigned record_bytes(int unsigned nblk);
    return HDR_BYTES + 2 * T7_BLOCK_LEN * nblk;
  endfunction

endpackage
