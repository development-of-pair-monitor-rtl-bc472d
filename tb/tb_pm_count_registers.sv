// tb_pm_count_registers -- self-checking test of the 16 count registers.
//
// Writes a random value into each timing-part register (in order and at random),
// keeps a reference copy, and reads every register back through rd_slot. Checks
// that clear zeroes all sixteen and that a write touches only its own register.
module tb_pm_count_registers;
  localparam int unsigned W = 8, N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, store = 1'b0;
  logic [3:0] store_slot = '0, rd_slot = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] ref_q [N];
  int checks = 0, failures = 0;

  pm_count_registers #(.CNT_W(W), .N_REGS(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_all(input string tag);
    for (int i = 0; i < N; i++) begin
      rd_slot = 4'(i); #1;
      check(rdata == ref_q[i], $sformatf("%s: reg %0d = %0h, expected %0h", tag, i, rdata, ref_q[i]));
    end
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) ref_q[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    read_all("after reset");
    // One write per timing part, in order.
    for (int i = 0; i < N; i++) begin
      store = 1'b1; store_slot = 4'(i); wdata = W'($urandom);
      ref_q[i] = wdata;
      @(negedge clk);
    end
    store = 1'b0;
    read_all("in order");
    // Random single writes.
    for (int k = 0; k < 40; k++) begin
      store = 1'b1; store_slot = 4'($urandom % N); wdata = W'($urandom);
      ref_q[store_slot] = wdata;
      @(negedge clk);
      store = 1'b0;
      read_all("random");
    end
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int i = 0; i < N; i++) ref_q[i] = '0;
    read_all("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
