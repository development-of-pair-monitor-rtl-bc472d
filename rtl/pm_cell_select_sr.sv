// pm_cell_select_sr -- shift register that specifies the readout cell.
//
// One flip-flop per readout cell, chained from cell 0 to cell N_CELLS-1. For
// readout a single 1 (the token) is shifted in at stage 0 and moved one stage per
// shift; the stage holding it selects its cell, whose data then go to the output
// line. sout is the last stage, so a following chip or the controller can see the
// token leave. The paper names a shift register that specifies a readout cell; the
// token scheme and the row-major cell order are this design's choice.
//
// Timing: sel and sout change on the clk edge where shift is high.
module pm_cell_select_sr #(
  parameter int unsigned N_CELLS = 36
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               shift,
  input  logic               sin,
  output logic [N_CELLS-1:0] sel,
  output logic               sout
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sel <= '0;
    else if (shift) sel <= {sel[N_CELLS-2:0], sin};
  end

  assign sout = sel[N_CELLS-1];

endmodule
