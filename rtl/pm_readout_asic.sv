// pm_readout_asic -- digital core of the pair-monitor readout ASIC (top level).
//
// The pair monitor measures the beam profile at the collision point of a linear
// collider from the hit distribution of e+e- pairs on a pixel sensor. This chip
// counts hits per pixel: 36 readout cells in a 6 x 6 array, each with an 8-bit Gray
// code counter and 16 count registers that keep one count per timing part of the
// bunch train. Between trains the 36 x 16 counts are read out one word at a time.
//
// Blocks, as the paper lists them: the distributor of the operation signals
// (pm_distributor), the shift register that specifies the readout cell
// (pm_cell_select_sr), the data transfer to the output line (pm_data_transfer)
// and the readout cells (pm_readout_cell). The analog amplifier and comparator of
// each cell are outside this RTL; their digital outputs are the comp_in ports,
// bit i belonging to cell i (row i / 6, column i % 6).
//
// Interface: comp_in levels are asynchronous; every other input is a single-cycle
// strobe synchronous to clk. See pm_distributor for the sequencing. dout is valid
// with dout_valid, one cycle after each rd_next; words come cell by cell, registers
// 0..15 within a cell, in Gray code.
module pm_readout_asic
  import pm_pkg::*;
#(
  parameter int unsigned BUNCHES_PER_PART = pm_pkg::PART_BUNCHES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CELLS-1:0] comp_in,
  input  logic               train_start,
  input  logic               bx,
  input  logic               train_end,
  input  logic               rd_start,
  input  logic               rd_next,
  output logic [CNT_W-1:0]   dout,
  output logic               dout_valid,
  output logic [SLOT_W-1:0]  part_idx,
  output logic               counting,
  output logic               reading,
  output logic               rd_done
);

  pm_ctrl_t           ctrl;
  logic               sr_shift, sr_din, sr_last, capture;
  logic [N_CELLS-1:0] sel;
  logic [CNT_W-1:0]   bus [N_CELLS];

  pm_distributor #(.BUNCHES_PER_PART(BUNCHES_PER_PART)) u_distributor (
    .clk, .rst_n,
    .train_start, .bx, .train_end, .rd_start, .rd_next,
    .sr_last,
    .ctrl, .sr_shift, .sr_din, .capture,
    .part_idx, .counting, .reading, .rd_done
  );

  pm_cell_select_sr #(.N_CELLS(N_CELLS)) u_cell_select (
    .clk, .rst_n,
    .shift (sr_shift),
    .sin   (sr_din),
    .sel,
    .sout  (sr_last)
  );

  for (genvar c = 0; c < int'(N_CELLS); c++) begin : g_cell
    pm_readout_cell u_cell (
      .clk, .rst_n,
      .ctrl,
      .comp_in (comp_in[c]),
      .sel     (sel[c]),
      .bus_out (bus[c])
    );
  end

  pm_data_transfer #(.N_CELLS(N_CELLS), .CNT_W(CNT_W)) u_data_transfer (
    .clk, .rst_n,
    .bus_in  (bus),
    .capture,
    .dout,
    .dout_valid
  );

  // At most one cell drives the output line.
  a_one_cell_selected: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sel));

endmodule
