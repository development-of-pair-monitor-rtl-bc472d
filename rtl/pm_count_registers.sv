// pm_count_registers -- the 16 count registers of one readout cell.
//
// A train is divided into 16 timing parts. At the end of each part the cell's hit
// count is written into the register of that part (store with store_slot), so that
// after the train the cell holds one 8-bit count per part. Any register can be read
// through rd_slot; rdata is combinational from the registers. clear zeroes all
// registers at the start of a train, so parts a short train never reached read 0.
// Register count and width follow the paper; the clear and the read port are this
// design's choices. Values are stored as given (Gray code from the counter).
module pm_count_registers #(
  parameter int unsigned CNT_W  = 8,
  parameter int unsigned N_REGS = 16,
  localparam int unsigned SLOT_W = $clog2(N_REGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              store,
  input  logic [SLOT_W-1:0] store_slot,
  input  logic [CNT_W-1:0]  wdata,
  input  logic [SLOT_W-1:0] rd_slot,
  output logic [CNT_W-1:0]  rdata
);

  logic [CNT_W-1:0] regs [N_REGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_REGS); i++) regs[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < int'(N_REGS); i++) regs[i] <= '0;
    end else if (store) begin
      regs[store_slot] <= wdata;
    end
  end

  assign rdata = regs[rd_slot];

  a_slot_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    store |-> (32'(store_slot) < N_REGS));

endmodule
