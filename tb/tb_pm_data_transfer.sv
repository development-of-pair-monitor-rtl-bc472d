// tb_pm_data_transfer -- self-checking test of the output-line data transfer.
//
// Drives one cell's bus input with a random word (all others zero), pulses capture
// and checks dout and dout_valid one cycle later; checks that dout holds without
// capture and that dout_valid is a single-cycle pulse.
module tb_pm_data_transfer;
  localparam int unsigned N = 36, W = 8;
  logic clk = 1'b0, rst_n = 1'b0, capture = 1'b0;
  logic [W-1:0] bus_in [N];
  logic [W-1:0] dout;
  logic dout_valid;
  int checks = 0, failures = 0;

  pm_data_transfer #(.N_CELLS(N), .CNT_W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] word;
    int c;
    for (int i = 0; i < N; i++) bus_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!dout_valid, "no valid after reset");
    for (int k = 0; k < 200; k++) begin
      c = k % N;
      word = W'($urandom);
      for (int i = 0; i < N; i++) bus_in[i] = (i == c) ? word : '0;
      capture = 1'b1; @(negedge clk); capture = 1'b0;
      check(dout_valid && dout == word, $sformatf("cell %0d word %0h got %0h", c, word, dout));
      for (int i = 0; i < N; i++) bus_in[i] = W'($urandom);
      @(negedge clk);
      check(!dout_valid && dout == word, "hold without capture");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
