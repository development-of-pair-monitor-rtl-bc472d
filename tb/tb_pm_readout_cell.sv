// tb_pm_readout_cell -- self-checking test of one readout cell's digital part.
//
// Plays a train of 16 timing parts with a random number of comparator pulses in
// each (some parts above 255 to cover the counter wrap), closes each part with a
// store strobe, then reads all 16 count registers through the output driver and
// compares the decoded Gray values with the pulses sent. Also checks that an
// unselected cell drives zero and that clear zeroes the registers.
module tb_pm_readout_cell;
  import pm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, comp_in = 1'b0, sel = 1'b0;
  pm_ctrl_t ctrl;
  logic [CNT_W-1:0] bus_out;
  int sent [N_REGS];
  int checks = 0, failures = 0;

  pm_readout_cell dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse();
    comp_in = 1'b1; repeat (2) @(negedge clk);
    comp_in = 1'b0; repeat (2) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ctrl = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ctrl.clear = 1'b1; @(negedge clk); ctrl.clear = 1'b0;
    ctrl.count_en = 1'b1;
    for (int p = 0; p < N_REGS; p++) begin
      sent[p] = (p == 3) ? 300 : (p == 9) ? 256 : int'($urandom % 200);
      for (int k = 0; k < sent[p]; k++) pulse();
      repeat (2) @(negedge clk);   // let the last edge through the synchroniser
      ctrl.store = 1'b1; ctrl.store_slot = 4'(p); @(negedge clk); ctrl.store = 1'b0;
    end
    ctrl.count_en = 1'b0;
    for (int p = 0; p < N_REGS; p++) begin
      ctrl.rd_slot = 4'(p);
      sel = 1'b0; #1;
      check(bus_out == '0, "unselected cell drives zero");
      sel = 1'b1; #1;
      check(gray2bin(bus_out) == CNT_W'(sent[p] % 256),
            $sformatf("part %0d: read %0d, sent %0d", p, gray2bin(bus_out), sent[p]));
      @(negedge clk);
    end
    ctrl.clear = 1'b1; @(negedge clk); ctrl.clear = 1'b0;
    for (int p = 0; p < N_REGS; p++) begin
      ctrl.rd_slot = 4'(p); #1;
      check(bus_out == '0, "cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
