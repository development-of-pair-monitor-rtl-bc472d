// pm_readout_cell -- digital part of one pixel readout cell.
//
// In the chip each 400 x 400 um^2 cell holds an amplifier, a comparator, an 8-bit
// counter and 16 count registers, in that order along the signal path. The analog
// amplifier and comparator are not part of this RTL: the comparator's digital
// output arrives on comp_in. The counter counts its rising edges during the counting
// window; at the end of each timing part the distributor's store strobe copies the
// count into the count register of that part and restarts the counter.
//
// For readout, the cell drives the count register addressed by ctrl.rd_slot onto
// its bus_out when the cell-select shift register selects it (sel), and drives zero
// otherwise; the OR of all cells' bus_out is the chip's output line. That AND-gated
// driver stands in for the line driver of the real cell, whose circuit the paper
// does not give.
//
// Timing: a comparator edge reaches the counter after 3 clk cycles (synchroniser);
// bus_out is combinational from sel, ctrl.rd_slot and the registers.
module pm_readout_cell
  import pm_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pm_ctrl_t         ctrl,
  input  logic             comp_in,
  input  logic             sel,
  output logic [CNT_W-1:0] bus_out
);

  logic [CNT_W-1:0] count;
  logic [CNT_W-1:0] rdata;

  pm_gray_counter #(.CNT_W(CNT_W), .SYNC_STAGES(SYNC_STAGES)) u_counter (
    .clk, .rst_n,
    .clear    (ctrl.clear),
    .count_en (ctrl.count_en),
    .restart  (ctrl.store),
    .comp_in,
    .count
  );

  pm_count_registers #(.CNT_W(CNT_W), .N_REGS(N_REGS)) u_regs (
    .clk, .rst_n,
    .clear      (ctrl.clear),
    .store      (ctrl.store),
    .store_slot (ctrl.store_slot),
    .wdata      (count),
    .rd_slot    (ctrl.rd_slot),
    .rdata
  );

  assign bus_out = rdata & {CNT_W{sel}};

endmodule
