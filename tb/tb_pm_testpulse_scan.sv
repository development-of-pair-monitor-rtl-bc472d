// tb_pm_testpulse_scan -- test-pulse linearity scan through the whole chip.
//
// Reproduces the chip's counter test: a known number of test pulses N_TP is sent
// and the count N_OUT read back from a count register must equal it, for every
// N_TP from 0 to 255, at a pulse rate of about 1 MHz. With clk taken as 40 MHz a
// pulse period is 40 cycles (20 high, 20 low); the clock frequency is this
// testbench's assumption.
//
// The test pulse drives all 36 comparator inputs at once. Each train carries 16
// scan points, one per timing part (bunch crossings every 64 cycles, 167 per part,
// so a part is long enough for 255 pulses). 16 trains cover N_TP = 0..255; after
// each train the 576 words are read out and every cell's register k must hold the
// N_TP of part k.
module tb_pm_testpulse_scan;
  import pm_pkg::*;
  localparam int unsigned TP_PERIOD  = 40;
  localparam int unsigned BX_SPACING = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_CELLS-1:0] comp_in;
  logic tp = 1'b0;
  logic train_start = 0, bx = 0, train_end = 0, rd_start = 0, rd_next = 0;
  logic [CNT_W-1:0] dout;
  logic dout_valid, counting, reading, rd_done;
  logic [SLOT_W-1:0] part_idx;
  int checks = 0, failures = 0;
  int ntp [N_REGS];

  assign comp_in = {N_CELLS{tp}};

  pm_readout_asic dut (.*);

  always #12.5 clk = ~clk;   // 40 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Bunch-crossing strobes while counting.
  always @(negedge clk) begin : bx_gen
    int unsigned phase;
    if (!counting) phase = 0;
    else begin
      phase++;
      bx <= (phase % BX_SPACING == 0);
    end
  end

  initial begin
    int words;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 16; t++) begin
      for (int k = 0; k < int'(N_REGS); k++) ntp[k] = t * 16 + k;
      train_start = 1'b1; @(negedge clk); train_start = 1'b0;
      for (int k = 0; k < int'(N_REGS); k++) begin
        // Pulses at the start of part k, then wait for the part to close.
        for (int n = 0; n < ntp[k]; n++) begin
          tp = 1'b1; repeat (TP_PERIOD / 2) @(negedge clk);
          tp = 1'b0; repeat (TP_PERIOD / 2) @(negedge clk);
        end
        while (counting && int'(part_idx) == k) @(negedge clk);
      end
      check(!counting, "train closed after 16 parts");
      // Readout.
      rd_start = 1'b1; @(negedge clk); rd_start = 1'b0;
      words = 0;
      rd_next = 1'b1;
      while (words < int'(N_CELLS * N_REGS)) begin
        @(posedge clk); #1;
        if (dout_valid) begin
          check(int'(gray2bin(dout)) == ntp[words % N_REGS],
                $sformatf("cell %0d: N_TP=%0d N_OUT=%0d", words / N_REGS, ntp[words % N_REGS], gray2bin(dout)));
          words++;
        end
        @(negedge clk);
      end
      rd_next = 1'b0;
      repeat (3) @(negedge clk);
      check(!reading, "readout done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
