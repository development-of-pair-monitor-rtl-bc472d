// pm_pkg -- shared constants, types and functions of the pair-monitor readout ASIC.
//
// The readout ASIC counts hits in each of 36 pixel cells (a 6 x 6 array) with an
// 8-bit counter whose value is stored, once per timing part, into one of 16 count
// registers; a train is split into 16 timing parts of 167 bunches. These numbers
// follow the paper. The broadcast control struct below (the "operation signals"
// sent from the distributor to every cell) and its fields are this design's own.
package pm_pkg;

  localparam int unsigned N_ROWS           = 6;
  localparam int unsigned N_COLS           = 6;
  localparam int unsigned N_CELLS          = N_ROWS * N_COLS;  // 36 readout cells
  localparam int unsigned CNT_W            = 8;                // 8-bit hit counter
  localparam int unsigned N_REGS           = 16;               // count registers per cell
  localparam int unsigned SLOT_W           = $clog2(N_REGS);
  localparam int unsigned PART_BUNCHES     = 167;              // 2670 bunches / 16 parts

  // Operation signals broadcast to every readout cell, all synchronous to clk.
  typedef struct packed {
    logic              clear;       // start of train: zero counter and count registers
    logic              count_en;    // counting window open
    logic              store;       // end of timing part: copy counter into store_slot
    logic [SLOT_W-1:0] store_slot;  // index of the timing part being closed
    logic [SLOT_W-1:0] rd_slot;     // count register driven onto the output line
  } pm_ctrl_t;

  // Gray <-> binary conversion, width-generic through the CNT_W default.
  function automatic logic [CNT_W-1:0] bin2gray(input logic [CNT_W-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [CNT_W-1:0] gray2bin(input logic [CNT_W-1:0] g);
    logic [CNT_W-1:0] b;
    b[CNT_W-1] = g[CNT_W-1];
    for (int i = int'(CNT_W) - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

endpackage
