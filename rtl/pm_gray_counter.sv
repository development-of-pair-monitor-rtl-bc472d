// pm_gray_counter -- per-cell hit counter, counting in Gray code.
//
// Each readout cell counts how many times its comparator fires. The paper gives an
// 8-bit counter whose bits are output in Gray code; this module builds that as a
// register that holds the Gray code itself and is stepped by converting it to binary,
// adding one and converting back, so exactly one bit changes per hit.
//
// The comparator output is an asynchronous level. It is passed through a
// SYNC_STAGES flip-flop synchroniser and every rising edge is one hit; a hit must be
// high and low for at least one clk period each to be seen. Counting only happens
// while count_en is high. clear zeroes the count (start of a train). restart marks
// the end of a timing part: the count restarts from zero, or from one if a hit edge
// falls in that same cycle, so no hit is lost between parts. On overflow the counter
// wraps from 255 to 0 like a plain binary counter. The synchroniser, the wrap and
// the restart rule are this design's choices; the paper does not describe them.
//
// Timing: count reflects a comparator edge SYNC_STAGES + 1 clk cycles after it.
module pm_gray_counter #(
  parameter int unsigned CNT_W       = 8,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             count_en,
  input  logic             restart,
  input  logic             comp_in,
  output logic [CNT_W-1:0] count
);

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   comp_d;   // synchronised level, delayed once
  logic                   hit;      // one-cycle pulse per rising edge
  logic [CNT_W-1:0]       bin_cur, bin_next, gray_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q <= '0;
      comp_d <= 1'b0;
    end else begin
      sync_q <= {sync_q[SYNC_STAGES-2:0], comp_in};
      comp_d <= sync_q[SYNC_STAGES-1];
    end
  end

  assign hit = sync_q[SYNC_STAGES-1] & ~comp_d;

  always_comb begin
    bin_cur[CNT_W-1] = count[CNT_W-1];
    for (int i = int'(CNT_W) - 2; i >= 0; i--) bin_cur[i] = bin_cur[i+1] ^ count[i];
    bin_next  = bin_cur + 1'b1;
    gray_next = bin_next ^ (bin_next >> 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                count <= '0;
    else if (clear)            count <= '0;
    else if (restart)          count <= (count_en && hit) ? CNT_W'(1) : '0;
    else if (count_en && hit)  count <= gray_next;
  end

  // A Gray counter changes exactly one bit per step.
  a_one_bit_step: assert property (@(posedge clk) disable iff (!rst_n)
    (count_en && hit && !clear && !restart) |=> $countones(count ^ $past(count)) == 1);

  initial assert (SYNC_STAGES >= 2) else $error("SYNC_STAGES must be at least 2");

endmodule
