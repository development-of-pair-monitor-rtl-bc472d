// tb_pm_cell_select_sr -- self-checking test of the cell-select shift register.
//
// Shifts a single token in and walks it through all 36 stages, checking after each
// shift that exactly the expected cell is selected, that sout rises only for the
// last cell, that the register holds while shift is low, and that the token leaves.
module tb_pm_cell_select_sr;
  localparam int unsigned N = 36;
  logic clk = 1'b0, rst_n = 1'b0, shift = 1'b0, sin = 1'b0;
  logic [N-1:0] sel;
  logic sout;
  logic [N-1:0] expect_sel;
  int checks = 0, failures = 0;

  pm_cell_select_sr #(.N_CELLS(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(sel == '0, "nothing selected after reset");
    shift = 1'b1; sin = 1'b1; @(negedge clk); sin = 1'b0; shift = 1'b0;
    expect_sel = N'(1);
    for (int c = 0; c < N; c++) begin
      check(sel == expect_sel, $sformatf("cell %0d selected", c));
      check(sout == (c == N - 1), $sformatf("sout at cell %0d", c));
      repeat ($urandom % 3) @(negedge clk);   // hold while shift is low
      check(sel == expect_sel, $sformatf("hold at cell %0d", c));
      shift = 1'b1; @(negedge clk); shift = 1'b0;
      expect_sel = expect_sel << 1;
    end
    check(sel == '0, "token shifted out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
