// mithril_count_cam: the estimated-count half of the Mithril table.
//
// N_ENTRY wrapping counters of CNT_W bits, one per Address CAM entry.  On an
// ACT the control logic increments one counter (inc_*); on an RFM that is not
// skipped it overwrites the greedily chosen counter with the table minimum
// (set_*).  All counters are visible at once on 'counts' for the find-max and
// find-min comparator trees.
//
// Counters wrap modulo 2^CNT_W.  This is safe because the tracker never needs
// an absolute count, only each counter's distance above the table minimum,
// and that distance stays below the bound M of the paper's Theorem 1
// (3122 for 256 entries and an RFM threshold of 128, hence CNT_W = 12).
//
// Timing: both operations take effect at the next rising edge; if both hit
// the same entry in one cycle, set wins (the control logic never does that).
// Reset clears every counter to zero, which is this design's choice.
module mithril_count_cam #(
  parameter int unsigned N_ENTRY = 256,
  parameter int unsigned CNT_W   = 12,
  localparam int unsigned IDX_W  = (N_ENTRY > 1) ? $clog2(N_ENTRY) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inc_en,
  input  logic [IDX_W-1:0] inc_idx,
  input  logic             set_en,
  input  logic [IDX_W-1:0] set_idx,
  input  logic [CNT_W-1:0] set_val,
  output logic [CNT_W-1:0] counts [N_ENTRY]
);

  logic [CNT_W-1:0] cnt_q [N_ENTRY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_ENTRY; i++) cnt_q[i] <= '0;
    end else begin
      for (int unsigned i = 0; i < N_ENTRY; i++) begin
        if (set_en && set_idx == IDX_W'(i))
          cnt_q[i] <= set_val;
        else if (inc_en && inc_idx == IDX_W'(i))
          cnt_q[i] <= cnt_q[i] + 1'b1;   // wraps modulo 2^CNT_W
      end
    end
  end

  assign counts = cnt_q;

endmodule
