// tb_pm_distributor -- self-checking test of the operation-signal distributor.
//
// Runs a nominal train of 2670 bunch crossings at the default 167 bunches per part
// and checks that a store strobe closes part k exactly at bunch 167(k+1) for the
// first 15 parts and that train_end closes the 16th (165 bunches). Runs a second
// train ended early by train_end, and one with no train_end, which must stop by
// itself after 16 parts. Then runs a full readout against a model of the 36-stage
// shift register: 576 capture strobes in order (register 0..15 within each cell),
// one shift per 16 words, rd_done after the last word. Requests that must be
// ignored (readout while counting) are tried too.
module tb_pm_distributor;
  import pm_pkg::*;
  localparam int unsigned BPP = 167;
  logic clk = 1'b0, rst_n = 1'b0;
  logic train_start = 0, bx = 0, train_end = 0, rd_start = 0, rd_next = 0, sr_last;
  pm_ctrl_t ctrl;
  logic sr_shift, sr_din, capture, counting, reading, rd_done;
  logic [SLOT_W-1:0] part_idx;
  logic [N_CELLS-1:0] sr_model;
  int checks = 0, failures = 0;

  pm_distributor #(.BUNCHES_PER_PART(BPP)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sr_model <= '0;
    else if (sr_shift) sr_model <= {sr_model[N_CELLS-2:0], sr_din};
  assign sr_last = sr_model[N_CELLS-1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run nbx bunch crossings; optionally end the train after them.
  task automatic run_train(input int nbx, input bit with_end, input int exp_stores);
    int sc = 0;
    train_start = 1'b1; #1;
    check(ctrl.clear && !ctrl.store, "clear at train start");
    @(negedge clk); train_start = 1'b0;
    check(counting && part_idx == 0, "counting from part 0");
    for (int b = 1; b <= nbx; b++) begin
      bx = 1'b1; #1;
      if (ctrl.store) begin
        check(b == BPP * (sc + 1), $sformatf("store at bunch %0d, expected %0d", b, BPP * (sc + 1)));
        check(int'(ctrl.store_slot) == sc, $sformatf("store slot %0d, expected %0d", ctrl.store_slot, sc));
        sc++;
      end
      @(negedge clk); bx = 1'b0;
      if (!counting) break;
      if ($urandom % 4 == 0) begin     // idle cycles between crossings
        rd_start = 1'b1; #1;           // must be ignored while counting
        check(!sr_shift && !capture, "rd_start ignored while counting");
        @(negedge clk); rd_start = 1'b0;
      end
    end
    if (with_end && counting) begin
      train_end = 1'b1; #1;
      check(ctrl.store && int'(ctrl.store_slot) == sc, "train_end closes current part");
      sc++;
      @(negedge clk); train_end = 1'b0;
    end
    check(!counting, "counting window closed");
    check(sc == exp_stores, $sformatf("%0d stores, expected %0d", sc, exp_stores));
  endtask

  initial begin
    int words;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!counting && !reading, "idle after reset");
    run_train(2670, 1'b1, 16);          // nominal train: 15 x 167 + 165
    run_train(700, 1'b1, 5);            // short train: 4 full parts + 1 partial
    run_train(BPP * 16 + 10, 1'b0, 16); // no train_end: stops after 16 parts

    // Readout.
    rd_next = 1'b1; #1;
    check(!capture, "rd_next ignored when idle");
    @(negedge clk); rd_next = 1'b0;
    rd_start = 1'b1; #1;
    check(sr_shift && sr_din, "rd_start injects token");
    @(negedge clk); rd_start = 1'b0;
    check(reading && sr_model == N_CELLS'(1), "cell 0 selected");
    words = 0;
    for (int c = 0; c < int'(N_CELLS); c++) begin
      for (int r = 0; r < int'(N_REGS); r++) begin
        check(sr_model == (N_CELLS'(1) << c) && int'(ctrl.rd_slot) == r,
              $sformatf("word %0d addresses cell %0d reg %0d", words, c, r));
        rd_next = 1'b1; #1;
        check(capture, "capture on rd_next");
        check(sr_shift == (r == int'(N_REGS) - 1) && !sr_din, "shift after 16th register");
        check(rd_done == (c == int'(N_CELLS) - 1 && r == int'(N_REGS) - 1), "rd_done only after last word");
        @(negedge clk); rd_next = 1'b0;
        words++;
        if ($urandom % 3 == 0) @(negedge clk);
      end
    end
    check(words == 576 && !reading && sr_model == '0, "readout of 576 words ends idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
