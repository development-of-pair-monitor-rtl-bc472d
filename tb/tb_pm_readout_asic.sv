// tb_pm_readout_asic -- end-to-end test of the readout ASIC at its default sizes.
//
// Plays the role of the readout system: starts a bunch train, issues one bx
// strobe per bunch crossing, drives the 36 comparator outputs with random pulse
// trains (cell 0 at the highest rate so its 8-bit counts wrap), ends the train,
// then reads the 576 counts back and compares them with a reference model.
//
// The reference model is written from the specification, not from the RTL: it
// samples every comparator at each clk edge, sees a rising edge after the 2-flop
// synchroniser, and assigns it to the timing part that is open at that edge; a hit
// seen at the edge that closes a part goes to the next part. Parts close after
// every 167 bunch crossings and at train_end.
//
// Trains run: a nominal 2670-bunch train (15 parts of 167, a 16th of 165 closed by
// train_end) and a short 1000-bunch train (6 parts; the other 10 registers must
// read 0). Each is read out in full with back-to-back rd_next strobes; the readout
// must deliver 576 consecutive words and finish 577 cycles after rd_start.
// Every mechanism is counted and must occur at least once: part closed by bunch
// count, part closed by train_end, counter wrap, hit coinciding with a part
// boundary, cell-select shift, readout request ignored while counting, and the
// switch from counting to readout.
module tb_pm_readout_asic;
  import pm_pkg::*;
  localparam int unsigned BPP = PART_BUNCHES;   // 167, the design default
  localparam int unsigned BX_SPACING = 8;       // clk cycles per bunch crossing

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_CELLS-1:0] comp_in = '0;
  logic train_start = 0, bx = 0, train_end = 0, rd_start = 0, rd_next = 0;
  logic [CNT_W-1:0] dout;
  logic dout_valid, counting, reading, rd_done;
  logic [SLOT_W-1:0] part_idx;
  int checks = 0, failures = 0;

  pm_readout_asic dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  int  exp_cnt [N_CELLS][N_REGS];   // true hit counts per part (unbounded)
  int  run_cnt [N_CELLS];
  logic [N_CELLS-1:0] s1 = '0, s2 = '0, s3 = '0;
  bit  m_counting = 0;
  int  m_part = 0, m_bunch = 0;
  int  n_close_bx = 0, n_close_end = 0, n_wrap = 0, n_coincide = 0;
  int  n_shift = 0, n_ignored = 0, n_mode_switch = 0;

  always @(posedge clk) begin : model
    logic [N_CELLS-1:0] hitv;
    bit close;
    hitv = s2 & ~s3;                 // edge seen in this cycle
    close = 0;
    if (train_start) begin
      m_counting = 1; m_part = 0; m_bunch = 0;
      for (int c = 0; c < N_CELLS; c++) begin
        run_cnt[c] = 0;
        for (int r = 0; r < N_REGS; r++) exp_cnt[c][r] = 0;
      end
    end else if (m_counting) begin
      if (bx) m_bunch++;
      close = (bx && m_bunch == BPP) || train_end;
      if (close) begin
        if (train_end) n_close_end++; else n_close_bx++;
        for (int c = 0; c < N_CELLS; c++) begin
          exp_cnt[c][m_part] = run_cnt[c];
          if (run_cnt[c] > 255) n_wrap++;
          run_cnt[c] = hitv[c] ? 1 : 0;
          if (hitv[c]) n_coincide++;
        end
        m_bunch = 0;
        if (train_end || m_part == N_REGS - 1) begin
          m_counting = 0;
          n_mode_switch++;
        end
        m_part++;
      end else begin
        for (int c = 0; c < N_CELLS; c++) if (hitv[c]) run_cnt[c]++;
      end
    end
    s3 <= s2; s2 <= s1; s1 <= comp_in;
  end

  always @(posedge clk) if (dut.sr_shift && dut.sel != '0) n_shift++;

  // ---------------- comparator stimulus ----------------
  bit stim_on = 0;
  always @(negedge clk) if (stim_on) begin
    for (int c = 0; c < N_CELLS; c++) begin
      int unsigned rate;   // toggle probability in percent
      rate = (c == 0) ? 100 : (c % 7 == 0) ? 40 : 5 + c % 5;
      if ($urandom % 100 < rate) comp_in[c] <= ~comp_in[c];
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_train(input int nbx);
    @(negedge clk);
    train_start = 1'b1; @(negedge clk); train_start = 1'b0;
    stim_on = 1;
    for (int b = 1; b <= nbx && counting; b++) begin
      repeat (BX_SPACING - 1) @(negedge clk);
      if (b % 500 == 0) begin         // a readout request in mid-train is ignored
        rd_start = 1'b1; @(negedge clk); rd_start = 1'b0;
        check(!reading, "rd_start ignored while counting");
        if (!reading) n_ignored++;
      end else @(negedge clk);
      bx = 1'b1; @(negedge clk); bx = 1'b0;
    end
    repeat (3) @(negedge clk);
    if (counting) begin train_end = 1'b1; @(negedge clk); train_end = 1'b0; end
    stim_on = 0;
    comp_in = '0;
    check(!counting, "counting window closed after train");
  endtask

  task automatic readout(input string tag);
    int words, tlast;
    logic [CNT_W-1:0] got;
    int exp;
    repeat (5) @(negedge clk);
    words = 0;
    tlast = 0;
    rd_start = 1'b1; @(negedge clk); rd_start = 1'b0;
    check(reading, "readout started");
    fork
      begin
        for (int k = 0; k < N_CELLS * N_REGS; k++) begin
          rd_next = 1'b1; @(negedge clk);
        end
        rd_next = 1'b0;
      end
      begin
        int cyc;
        cyc = 1;
        while (words < N_CELLS * N_REGS && cyc < 2000) begin
          @(posedge clk); #1; cyc++;
          if (dout_valid) begin
            int c, r;
            c = words / N_REGS;
            r = words % N_REGS;
            got = dout;
            exp = exp_cnt[c][r] % 256;
            check(int'(gray2bin(got)) == exp,
                  $sformatf("%s cell %0d part %0d: read %0d expected %0d", tag, c, r, gray2bin(got), exp));
            words++;
            tlast = cyc;
          end
        end
      end
    join
    check(words == N_CELLS * N_REGS, $sformatf("%s: %0d words read", tag, words));
    check(tlast == N_CELLS * N_REGS + 1, $sformatf("%s: last word %0d cycles after rd_start, expected 577", tag, tlast));
    @(negedge clk);
    check(!reading, "readout finished");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_train(2670);
    readout("nominal train");
    run_train(1000);
    for (int r = 6; r < N_REGS; r++) check(exp_cnt[5][r] == 0, "model: unreached parts are zero");
    readout("short train");

    check(n_close_bx > 0,    $sformatf("parts closed by bunch count: %0d", n_close_bx));
    check(n_close_end > 0,   $sformatf("parts closed by train_end: %0d", n_close_end));
    check(n_wrap > 0,        $sformatf("counter wraps: %0d", n_wrap));
    check(n_coincide > 0,    $sformatf("hits at a part boundary: %0d", n_coincide));
    check(n_shift > 0,       $sformatf("cell-select shifts: %0d", n_shift));
    check(n_ignored > 0,     $sformatf("ignored readout requests: %0d", n_ignored));
    check(n_mode_switch > 0, $sformatf("count-to-readout switches: %0d", n_mode_switch));
    $display("mechanisms: close_bx=%0d close_end=%0d wrap=%0d coincide=%0d shift=%0d ignored=%0d switch=%0d",
             n_close_bx, n_close_end, n_wrap, n_coincide, n_shift, n_ignored, n_mode_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
