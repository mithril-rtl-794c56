// mithril_mode_reg: the Mithril+ mode register of a DRAM chip.
//
// Each bank's Mithril logic raises a flag while the spread between its
// largest and smallest estimated count is below the adaptive threshold, i.e.
// while an RFM to it would be skipped.  The memory controller reads the flag
// of one bank with an MRR (mode register read) before deciding whether to
// send an RFM.  Here an MRR names the bank directly; the register captures
// that bank's flag at the MRR edge and returns it one cycle later
// (rsp_valid, rsp_flag).  A bank number outside NUM_BANKS reads as 0.
//
// The paper gives the flag and its use; the mode-register address map and
// the one-cycle read latency are this design's choices.
module mithril_mode_reg
  import mithril_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_BANKS-1:0] flags,
  input  logic                 mrr_valid,
  input  bank_t                mrr_bank,
  output logic                 rsp_valid,
  output logic                 rsp_flag
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_flag  <= 1'b0;
    end else begin
      rsp_valid <= mrr_valid;
      if (mrr_valid)
        rsp_flag <= (32'(mrr_bank) < NUM_BANKS) ? flags[mrr_bank] : 1'b0;
    end
  end

endmodule
