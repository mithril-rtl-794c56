// mithril_system: memory controller RFM logic plus one DRAM chip with
// per-bank Mithril Row Hammer tracking.
//
// The memory-controller scheduler (outside this design) offers ACTs on
// sched_*.  rfm_logic counts them per bank and inserts an RFM every RFM_TH
// ACTs to a bank; in Mithril+ mode (plus_en) it first reads the bank's flag
// with MRR and drops RFMs the bank does not need.  mithril_dram tracks every
// bank's activations and, on each RFM whose bank shows enough imbalance,
// emits the victim rows of its most-activated row on pref_valid/pref_row,
// the preventive refreshes that go to the (external) cell arrays.
//
// Defaults are the evaluated configuration: 32 banks, 256 table entries per
// bank, RFM threshold 128, adaptive threshold 200, 12-bit wrapping counters,
// which the paper's Theorem 1 shows protects rows against a Row Hammer
// threshold of 6.25K activations (double-sided).
module mithril_system
  import mithril_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned N_ENTRY   = 256,
  parameter int unsigned CNT_W     = 12,
  parameter int unsigned RFM_TH    = 128,
  parameter int unsigned AD_TH     = 200,
  parameter int unsigned BLAST_R   = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 plus_en,
  input  logic                 sched_valid,
  output logic                 sched_ready,
  input  bank_t                sched_bank,
  input  row_t                 sched_row,
  output logic [NUM_BANKS-1:0] pref_valid,
  output row_t                 pref_row [NUM_BANKS],
  output logic [NUM_BANKS-1:0] mr_flags,
  output logic [NUM_BANKS-1:0] ev_hit,
  output logic [NUM_BANKS-1:0] ev_miss,
  output logic [NUM_BANKS-1:0] ev_refresh,
  output logic [NUM_BANKS-1:0] ev_skip,
  output logic                 ev_rfm,
  output logic                 ev_plus_skip,
  output logic                 ev_stall
);

  logic     cmd_valid, cmd_ready, mrr_rsp_valid, mrr_rsp_flag;
  ddr_cmd_t cmd;

  rfm_logic #(.NUM_BANKS(NUM_BANKS), .RFM_TH(RFM_TH)) u_mc_rfm (
    .clk, .rst_n, .plus_en,
    .sched_valid, .sched_ready, .sched_bank, .sched_row,
    .cmd_valid, .cmd_ready, .cmd,
    .mrr_rsp_valid, .mrr_rsp_flag,
    .ev_rfm, .ev_plus_skip, .ev_stall
  );

  mithril_dram #(
    .NUM_BANKS(NUM_BANKS), .N_ENTRY(N_ENTRY), .CNT_W(CNT_W),
    .AD_TH(AD_TH), .BLAST_R(BLAST_R)
  ) u_dram (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .mrr_rsp_valid, .mrr_rsp_flag,
    .pref_valid, .pref_row, .mr_flags,
    .ev_hit, .ev_miss, .ev_refresh, .ev_skip
  );

endmodule
