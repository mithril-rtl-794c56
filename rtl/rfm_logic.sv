// rfm_logic: memory-controller side of the RFM interface, with the optional
// Mithril+ check.
//
// One Rolling Accumulated ACT (RAA) counter per bank counts the ACTs the
// scheduler sends to that bank.  When a bank's counter reaches RFM_TH the
// controller stalls the scheduler and sends an RFM command to that bank,
// then clears the counter (JEDEC RFM issue flow).  With plus_en set
// (Mithril+) it first sends an MRR to read the bank's Mithril+ flag; if the
// flag says the bank would skip the refresh anyway, no RFM is sent and the
// counter is simply cleared.
//
// Interface: ACTs arrive on sched_* (valid/ready) and leave on cmd_*
// (valid/ready) in the same cycle; RFM and MRR are inserted on cmd_* while
// sched_ready is low.  MRR data returns on mrr_rsp_*.
//
// Timing: the ACT that brings a counter to RFM_TH is followed by the RFM as
// soon as the bank is ready (or by MRR, the response, then RFM or nothing).
// Stalling the scheduler for that time and clearing the counter on a
// Mithril+ skip are this design's choices; the counting rule is the
// standard's.
module rfm_logic
  import mithril_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned RFM_TH    = 128,
  localparam int unsigned RAA_W    = $clog2(RFM_TH + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     plus_en,
  // ACT stream from the scheduler
  input  logic     sched_valid,
  output logic     sched_ready,
  input  bank_t    sched_bank,
  input  row_t     sched_row,
  // command channel to the DRAM
  output logic     cmd_valid,
  input  logic     cmd_ready,
  output ddr_cmd_t cmd,
  // MRR response
  input  logic     mrr_rsp_valid,
  input  logic     mrr_rsp_flag,
  // one-cycle event pulses
  output logic     ev_rfm,        // RFM sent
  output logic     ev_plus_skip,  // RFM withheld by the Mithril+ flag
  output logic     ev_stall       // scheduler ACT held back this cycle
);

  typedef enum logic [1:0] {S_PASS, S_MRR, S_MRR_WAIT, S_RFM} state_e;

  state_e           state_q;
  bank_t            pend_q;
  logic [RAA_W-1:0] raa_q [NUM_BANKS];

  logic act_fire, reach_th, clr_pend;

  always_comb begin
    cmd_valid   = 1'b0;
    cmd         = '{op: CMD_NOP, bank: pend_q, row: '0};
    sched_ready = 1'b0;
    unique case (state_q)
      S_PASS: begin
        cmd_valid   = sched_valid;
        cmd         = '{op: CMD_ACT, bank: sched_bank, row: sched_row};
        sched_ready = cmd_ready;
      end
      S_MRR: begin
        cmd_valid = 1'b1;
        cmd.op    = CMD_MRR;
      end
      S_RFM: begin
        cmd_valid = 1'b1;
        cmd.op    = CMD_RFM;
      end
      default: ;
    endcase
  end

  assign act_fire = (state_q == S_PASS) && sched_valid && cmd_ready;
  assign reach_th = act_fire && (32'(raa_q[sched_bank]) + 1 >= RFM_TH);
  assign ev_rfm       = (state_q == S_RFM) && cmd_ready;
  assign ev_plus_skip = (state_q == S_MRR_WAIT) && mrr_rsp_valid && mrr_rsp_flag;
  assign clr_pend     = ev_rfm || ev_plus_skip;
  assign ev_stall     = sched_valid && !sched_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_PASS;
      pend_q  <= '0;
      for (int unsigned b = 0; b < NUM_BANKS; b++) raa_q[b] <= '0;
    end else begin
      if (act_fire) raa_q[sched_bank] <= raa_q[sched_bank] + 1'b1;
      if (clr_pend) raa_q[pend_q] <= '0;
      unique case (state_q)
        S_PASS: if (reach_th) begin
          pend_q  <= sched_bank;
          state_q <= plus_en ? S_MRR : S_RFM;
        end
        S_MRR:      if (cmd_ready) state_q <= S_MRR_WAIT;
        S_MRR_WAIT: if (mrr_rsp_valid) state_q <= mrr_rsp_flag ? S_PASS : S_RFM;
        S_RFM:      if (cmd_ready) state_q <= S_PASS;
        default:    state_q <= S_PASS;
      endcase
    end
  end

  // an ACT only reaches a bank whose counter is below the threshold
  a_raa_bound: assert property (@(posedge clk) disable iff (!rst_n)
    act_fire |-> 32'(raa_q[sched_bank]) < RFM_TH);

endmodule
