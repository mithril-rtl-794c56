// mithril_dram: the Mithril side of one DRAM chip.
//
// Holds one mithril_bank per bank and the Mithril+ mode register.  ACT and
// RFM commands are steered to the addressed bank; MRR goes to the mode
// register.  cmd_ready follows the addressed bank's ready, so the memory
// controller waits while that bank is updating its pointers or emitting
// preventive refreshes; other banks are independent.  MRR waits too, so the
// flag it returns already reflects the bank's last command.  Each bank's victim
// rows come out on its own pref_valid/pref_row pair, towards the cell array.
//
// Timing: see mithril_ctrl (bank) and mithril_mode_reg (MRR, one cycle).
// The valid/ready command channel stands in for the DDR5 command bus, which
// this design does not model.
module mithril_dram
  import mithril_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned N_ENTRY   = 256,
  parameter int unsigned CNT_W     = 12,
  parameter int unsigned AD_TH     = 200,
  parameter int unsigned BLAST_R   = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  ddr_cmd_t             cmd,
  output logic                 mrr_rsp_valid,
  output logic                 mrr_rsp_flag,
  output logic [NUM_BANKS-1:0] pref_valid,
  output row_t                 pref_row [NUM_BANKS],
  output logic [NUM_BANKS-1:0] mr_flags,
  output logic [NUM_BANKS-1:0] ev_hit,
  output logic [NUM_BANKS-1:0] ev_miss,
  output logic [NUM_BANKS-1:0] ev_refresh,
  output logic [NUM_BANKS-1:0] ev_skip
);

  logic [NUM_BANKS-1:0] bank_ready;
  logic                 bank_ok;

  assign bank_ok   = 32'(cmd.bank) < NUM_BANKS;
  assign cmd_ready = bank_ok ? bank_ready[cmd.bank] : 1'b1;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic bank_cmd;
    assign bank_cmd = cmd_valid && (32'(cmd.bank) == b) &&
                      (cmd.op == CMD_ACT || cmd.op == CMD_RFM) && bank_ready[b];

    mithril_bank #(
      .N_ENTRY(N_ENTRY), .CNT_W(CNT_W), .AD_TH(AD_TH), .BLAST_R(BLAST_R)
    ) u_bank (
      .clk, .rst_n,
      .cmd_valid  (bank_cmd),
      .cmd_is_rfm (cmd.op == CMD_RFM),
      .cmd_row    (cmd.row),
      .ready      (bank_ready[b]),
      .pref_valid (pref_valid[b]),
      .pref_row   (pref_row[b]),
      .mr_flag    (mr_flags[b]),
      .max_ptr    (),
      .min_ptr    (),
      .min_val    (),
      .max_diff   (),
      .ev_hit     (ev_hit[b]),
      .ev_miss    (ev_miss[b]),
      .ev_refresh (ev_refresh[b]),
      .ev_skip    (ev_skip[b])
    );
  end

  mithril_mode_reg #(.NUM_BANKS(NUM_BANKS)) u_mode_reg (
    .clk, .rst_n,
    .flags     (mr_flags),
    .mrr_valid (cmd_valid && cmd.op == CMD_MRR),
    .mrr_bank  (cmd.bank),
    .rsp_valid (mrr_rsp_valid),
    .rsp_flag  (mrr_rsp_flag)
  );

endmodule
