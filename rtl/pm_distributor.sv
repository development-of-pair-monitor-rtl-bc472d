// pm_distributor -- distributor of the operation signals.
//
// The one controller of the readout ASIC. It turns a handful of chip inputs into
// the signals broadcast to all readout cells (ctrl) and into the strobes of the
// cell-select shift register and the data-transfer block. The paper names this
// block only; its signal set and the sequencing below are this design's own,
// built around the paper's numbers: 16 timing parts per train of 167 bunches each.
//
// Counting. train_start (from idle or while counting) raises ctrl.clear for one
// cycle and opens the counting window (ctrl.count_en). Each bx strobe is one bunch
// crossing; after BUNCHES_PER_PART of them the current timing part closes: ctrl.store
// copies every cell's counter into count register part_idx and the next part begins.
// train_end closes the current part early; this is how the 16th part of a 2670-bunch
// train (16 x 167 = 2672) ends, with 165 bunches. The window closes with the 16th
// part or at train_end.
//
// Readout. Outside the counting window, rd_start shifts a single 1 into the
// cell-select register (cell 0 selected) and points ctrl.rd_slot at register 0.
// Each rd_next then captures the selected word into the output register and
// advances: through the 16 registers of a cell, then one shift to the next cell.
// After the last register of the last cell (sr_last high) the token is shifted out,
// rd_done pulses and the distributor returns to idle: 576 words per readout.
// rd_start and rd_next are ignored while counting, train_start while reading.
//
// All inputs are single-cycle strobes synchronous to clk; all outputs are
// combinational from the state and the current inputs (the cells and the shift
// register act on them at the next clk edge).
module pm_distributor
  import pm_pkg::*;
#(
  parameter int unsigned BUNCHES_PER_PART = pm_pkg::PART_BUNCHES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              train_start,
  input  logic              bx,
  input  logic              train_end,
  input  logic              rd_start,
  input  logic              rd_next,
  input  logic              sr_last,
  output pm_ctrl_t          ctrl,
  output logic              sr_shift,
  output logic              sr_din,
  output logic              capture,
  output logic [SLOT_W-1:0] part_idx,
  output logic              counting,
  output logic              reading,
  output logic              rd_done
);

  localparam int unsigned BX_W = $clog2(BUNCHES_PER_PART + 1);

  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_READ} state_t;

  state_t            state, state_n;
  logic [BX_W-1:0]   bx_cnt, bx_cnt_n;
  logic [SLOT_W-1:0] part_n;
  logic [SLOT_W-1:0] rd_slot, rd_slot_n;
  logic              part_close;

  assign counting = (state == S_COUNT);
  assign reading  = (state == S_READ);

  always_comb begin
    state_n    = state;
    bx_cnt_n   = bx_cnt;
    part_n     = part_idx;
    rd_slot_n  = rd_slot;
    ctrl       = '0;
    sr_shift   = 1'b0;
    sr_din     = 1'b0;
    capture    = 1'b0;
    rd_done    = 1'b0;
    part_close = 1'b0;

    ctrl.store_slot = part_idx;
    ctrl.rd_slot    = rd_slot;
    ctrl.count_en   = (state == S_COUNT);

    unique case (state)
      S_IDLE, S_COUNT: begin
        if (train_start) begin
          ctrl.clear = 1'b1;
          state_n    = S_COUNT;
          bx_cnt_n   = '0;
          part_n     = '0;
        end else if (state == S_COUNT) begin
          if (bx) bx_cnt_n = bx_cnt + 1'b1;
          part_close = (bx && (32'(bx_cnt) == BUNCHES_PER_PART - 1)) || train_end;
          if (part_close) begin
            ctrl.store = 1'b1;
            bx_cnt_n   = '0;
            part_n     = part_idx + 1'b1;
            if (train_end || (32'(part_idx) == N_REGS - 1)) begin
              state_n = S_IDLE;
              part_n  = '0;
            end
          end
        end else if (rd_start) begin
          sr_shift  = 1'b1;
          sr_din    = 1'b1;
          rd_slot_n = '0;
          state_n   = S_READ;
        end
      end
      S_READ: begin
        if (rd_next) begin
          capture = 1'b1;
          if (32'(rd_slot) == N_REGS - 1) begin
            rd_slot_n = '0;
            sr_shift  = 1'b1;
            if (sr_last) begin
              rd_done = 1'b1;
              state_n = S_IDLE;
            end
          end else begin
            rd_slot_n = rd_slot + 1'b1;
          end
        end
      end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bx_cnt   <= '0;
      part_idx <= '0;
      rd_slot  <= '0;
    end else begin
      state    <= state_n;
      bx_cnt   <= bx_cnt_n;
      part_idx <= part_n;
      rd_slot  <= rd_slot_n;
    end
  end

  // Operation strobes never coincide.
  a_clear_store_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(ctrl.clear && ctrl.store));
  a_no_capture_while_counting: assert property (@(posedge clk) disable iff (!rst_n)
    !(capture && ctrl.count_en));

  initial assert (BUNCHES_PER_PART >= 1) else $error("BUNCHES_PER_PART must be >= 1");

endmodule
