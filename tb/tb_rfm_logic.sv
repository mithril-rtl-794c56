// tb_rfm_logic: self-checking testbench of the memory-controller RFM logic.
//
// Four banks, RFM_TH = 8.  The testbench plays both the scheduler (random
// ACTs under valid/ready, held until accepted) and the DRAM (random
// cmd_ready, MRR answered one cycle later with a random flag).  A model of
// the per-bank RAA counters checks, cycle by cycle, that every bank gets an
// RFM exactly after each RFM_TH ACTs (plain mode) or an MRR followed by an
// RFM only when the flag is clear (Mithril+ mode), that the RFM or MRR is
// offered in the very cycle it is due, that the scheduler is stalled while
// one is pending, and that ACTs pass through unchanged.
module tb_rfm_logic;
  import mithril_pkg::*;
  localparam int NB = 4, TH = 8;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic plus_en, sched_valid, sched_ready, cmd_valid, cmd_ready;
  logic mrr_rsp_valid, mrr_rsp_flag, ev_rfm, ev_plus_skip, ev_stall;
  bank_t sched_bank;
  row_t  sched_row;
  ddr_cmd_t cmd;

  rfm_logic #(.NUM_BANKS(NB), .RFM_TH(TH)) dut (.*);

  int checks = 0, failures = 0;
  int raa [NB];
  int phase;        // 0 none, 1 MRR due, 2 waiting for MRR data, 3 RFM due
  int pend;
  int n_act, n_rfm, n_mrr, n_pskip, n_stall;
  int acts_bank [NB];
  int rfms_bank [NB];
  bit rsp_next, rsp_flag_next;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  task automatic run(int cycles, bit plus);
    plus_en = plus;
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      // scheduler: hold an offered ACT until accepted
      mrr_rsp_valid = rsp_next;
      mrr_rsp_flag  = rsp_flag_next;
      rsp_next      = 0;
      cmd_ready     = ($urandom_range(0, 9) < 7);
      #1;
      // checks on what the controller offers this cycle
      if (phase == 1) check(cmd_valid && cmd.op == CMD_MRR && int'(cmd.bank) == pend, "MRR offered when due");
      if (phase == 3) check(cmd_valid && cmd.op == CMD_RFM && int'(cmd.bank) == pend, "RFM offered when due");
      if (phase != 0) check(!sched_ready, "scheduler stalled while RFM/MRR pending");
      if (phase == 0 && sched_valid)
        check(cmd_valid && cmd.op == CMD_ACT && cmd.bank == sched_bank && cmd.row == sched_row &&
              sched_ready == cmd_ready, "ACT passes through");
      if (phase == 0 && !sched_valid) check(!cmd_valid, "idle channel");
      check(ev_plus_skip == (phase == 2 && mrr_rsp_valid && mrr_rsp_flag), "ev_plus_skip");
      if (sched_valid && !sched_ready) n_stall++;
      // model update for the coming edge
      if (phase == 2 && mrr_rsp_valid) begin
        if (mrr_rsp_flag) begin raa[pend] = 0; phase = 0; n_pskip++; end
        else phase = 3;
      end else if (cmd_valid && cmd_ready) begin
        if (cmd.op == CMD_ACT) begin
          n_act++;
          acts_bank[cmd.bank]++;
          raa[cmd.bank]++;
          if (raa[cmd.bank] == TH) begin pend = int'(cmd.bank); phase = plus ? 1 : 3; end
        end else if (cmd.op == CMD_MRR) begin
          n_mrr++;
          phase = 2;
          rsp_next = 1;
          rsp_flag_next = ($urandom_range(0, 1) == 1);
        end else if (cmd.op == CMD_RFM) begin
          check(ev_rfm, "ev_rfm on RFM");
          n_rfm++;
          rfms_bank[pend]++;
          raa[pend] = 0;
          phase = 0;
        end
      end
      @(posedge clk);
      #1;
      // scheduler side: new offer after acceptance or at random
      if (!sched_valid || (sched_valid && sched_ready_q)) begin
        sched_valid = ($urandom_range(0, 9) < 8);
        sched_bank  = bank_t'(($urandom_range(0, 3) == 0) ? $urandom_range(0, NB - 1) : 0);
        sched_row   = row_t'($urandom());
      end
    end
  endtask

  logic sched_ready_q;
  always @(posedge clk) sched_ready_q <= sched_valid && sched_ready;

  initial begin
    rst_n = 0; plus_en = 0; sched_valid = 0; sched_bank = 0; sched_row = 0;
    cmd_ready = 1; mrr_rsp_valid = 0; mrr_rsp_flag = 0;
    rsp_next = 0; rsp_flag_next = 0;
    phase = 0; pend = 0; n_act = 0; n_rfm = 0; n_mrr = 0; n_pskip = 0; n_stall = 0;
    foreach (raa[i]) begin raa[i] = 0; acts_bank[i] = 0; rfms_bank[i] = 0; end
    #12 rst_n = 1;
    run(3000, 1'b0);
    // plain mode: RFM rate is exactly one per RFM_TH ACTs per bank
    for (int b = 0; b < NB; b++)
      check(rfms_bank[b] == acts_bank[b] / TH, $sformatf("bank %0d: %0d RFMs for %0d ACTs", b, rfms_bank[b], acts_bank[b]));
    // drain, then Mithril+ mode
    while (phase != 0) run(1, 1'b0);
    run(3000, 1'b1);
    while (phase != 0) run(1, 1'b1);
    checks += 4;
    if (n_rfm == 0)   failures++;
    if (n_mrr == 0)   failures++;
    if (n_pskip == 0) failures++;
    if (n_stall == 0) failures++;
    $display("acts=%0d rfm=%0d mrr=%0d plus_skips=%0d stalls=%0d", n_act, n_rfm, n_mrr, n_pskip, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
