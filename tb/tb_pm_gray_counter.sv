// tb_pm_gray_counter -- self-checking test of the Gray-code hit counter.
//
// Sends comparator pulses and keeps its own binary count. After every pulse the
// counter's Gray output is decoded here (independently of the design) and compared;
// successive outputs must differ in exactly one bit. Covers: the count-versus-pulses
// line up to and past 255 (wrap to 0), the latency from a comparator edge to the
// count (3 cycles), hits ignored outside the counting window, clear, and a hit that
// coincides with a restart (counted as 1 in the new part).
module tb_pm_gray_counter;
  localparam int unsigned W = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, count_en = 1'b0, restart = 1'b0, comp_in = 1'b0;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  pm_gray_counter #(.CNT_W(W)) dut (.*);

  always #5 clk = ~clk;

  function automatic int dec(input logic [W-1:0] g);
    int b = 0;
    for (int i = W - 1; i >= 0; i--) b = (b << 1) | (((b & 1) ^ int'(g[i])) & 1);
    return b;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse();   // one comparator pulse: 2 cycles high, 2 low
    comp_in = 1'b1; repeat (2) @(negedge clk);
    comp_in = 1'b0; repeat (2) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model;
    logic [W-1:0] prev;
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(count == 0, "zero after reset");

    // Counting window closed: pulses ignored.
    repeat (3) pulse();
    check(count == 0, "hits ignored while count_en low");

    // N_TP = 1..300 against N_OUT, with wrap at 256.
    count_en = 1'b1;
    model = 0;
    prev  = count;
    for (int n = 1; n <= 300; n++) begin
      pulse();
      model = (model + 1) % 256;
      check(dec(count) == model, $sformatf("N_TP=%0d N_OUT=%0d", n, dec(count)));
      check($countones(count ^ prev) == 1, $sformatf("one bit changes at %0d", n));
      prev = count;
    end

    // Latency from comparator rising edge to count update.
    prev = count;
    comp_in = 1'b1;
    lat = 0;
    while (count == prev && lat < 10) begin @(posedge clk); #1; lat++; end
    check(lat == 3, $sformatf("latency %0d cycles, expected 3", lat));
    @(negedge clk); comp_in = 1'b0; repeat (2) @(negedge clk);

    // Clear.
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    check(count == 0, "clear");

    // Restart without a hit -> 0; restart with a coincident hit edge -> 1.
    repeat (5) pulse();
    check(dec(count) == 5, "5 hits before restart");
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    check(count == 0, "restart without hit gives 0");
    repeat (4) pulse();
    comp_in = 1'b1;
    @(negedge clk); @(negedge clk);   // edge detected in the next cycle
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    check(dec(count) == 1, $sformatf("hit coincident with restart kept, count=%0d", dec(count)));
    comp_in = 1'b0; repeat (3) @(negedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
