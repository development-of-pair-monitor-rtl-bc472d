// pm_data_transfer -- carries the selected cell's count to the output line.
//
// Every readout cell drives its addressed count register onto bus_in when it is
// selected and zero otherwise, so the OR of all N_CELLS inputs is the selected
// cell's word. On capture that word is registered into dout and dout_valid is
// raised for one cycle. The paper names this block ("data transfer to the output
// line") without describing it; the wired-OR collection, the 8-bit parallel output
// and the single output register are this design's simplest choice.
//
// Timing: dout and dout_valid are valid in the cycle after capture.
module pm_data_transfer #(
  parameter int unsigned N_CELLS = 36,
  parameter int unsigned CNT_W   = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] bus_in [N_CELLS],
  input  logic             capture,
  output logic [CNT_W-1:0] dout,
  output logic             dout_valid
);

  logic [CNT_W-1:0] line;

  always_comb begin
    line = '0;
    for (int i = 0; i < int'(N_CELLS); i++) line |= bus_in[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= capture;
      if (capture) dout <= line;
    end
  end

endmodule
