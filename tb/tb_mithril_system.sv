// tb_mithril_system: end-to-end testbench of the memory controller RFM logic
// and the DRAM chip with per-bank Mithril tracking, at reduced size
// (4 banks, 8 entries, 6-bit counters, RFM_TH 8, adaptive threshold 6).
//
// The testbench is the scheduler: it offers ACTs under valid/ready in four
// phases - benign traffic and a double-sided hammer, each in plain and in
// Mithril+ mode.  For every accepted ACT it advances a per-bank reference
// model and a per-bank RAA count; at each RFM_TH-th ACT of a bank it predicts
// what the system must do (RFM with refresh, RFM skipped by adaptive refresh,
// or, in Mithril+ mode, RFM withheld after MRR) and which victim rows must
// appear on that bank's preventive-refresh port.  At the end it compares the
// victim streams, every event count and the RFM rate, and requires each
// mechanism (hit, miss, refresh, adaptive skip, Mithril+ skip, stall,
// counter wrap, mode switch) to have happened.
module tb_mithril_system;
  import mithril_pkg::*;
  import mithril_ref_pkg::*;
  localparam int NB = 4, N = 8, W = 6, TH = 8, AD = 6;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic plus_en, sched_valid, sched_ready;
  bank_t sched_bank;
  row_t  sched_row;
  logic [NB-1:0] pref_valid, mr_flags, ev_hit, ev_miss, ev_refresh, ev_skip;
  row_t pref_row [NB];
  logic ev_rfm, ev_plus_skip, ev_stall;

  mithril_system #(.NUM_BANKS(NB), .N_ENTRY(N), .CNT_W(W), .RFM_TH(TH), .AD_TH(AD), .BLAST_R(1)) dut (.*);

  mithril_ref rm [NB];
  int raa [NB];
  int exp_vic [NB][$];
  int got_vic [NB][$];
  int checks = 0, failures = 0;
  // expected and observed event counts
  int e_hit, e_miss, e_ref, e_askip, e_rfm, e_pskip;
  int o_hit, o_miss, o_ref, o_askip, o_rfm, o_pskip, o_stall;
  int n_wrap, n_switch;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // monitor: sample mid-cycle, after the driver has settled
  initial forever begin
    @(negedge clk); #3;
    for (int b = 0; b < NB; b++) begin
      if (pref_valid[b]) got_vic[b].push_back(int'(pref_row[b]));
      o_hit   += int'(ev_hit[b]);
      o_miss  += int'(ev_miss[b]);
      o_ref   += int'(ev_refresh[b]);
      o_askip += int'(ev_skip[b]);
    end
    o_rfm   += int'(ev_rfm);
    o_pskip += int'(ev_plus_skip);
    o_stall += int'(ev_stall);
  end

  // what the system must do at an RFM_TH-th ACT of bank b
  task automatic at_threshold(int b);
    int aggr;
    bit rf;
    if (plus_en && rm[b].flag()) begin
      e_pskip++;
      return;
    end
    e_rfm++;
    rf = rm[b].rfm(aggr);
    if (rf) begin
      e_ref++;
      if (aggr > 0) exp_vic[b].push_back(aggr - 1);
      if (aggr < 65535) exp_vic[b].push_back(aggr + 1);
    end else e_askip++;
  endtask

  task automatic act(int b, int row);
    longint old_min;
    @(negedge clk);
    sched_valid = 1; sched_bank = bank_t'(b); sched_row = row_t'(row);
    #1;
    while (!sched_ready) begin @(negedge clk); #1; end
    // accepted at the coming edge
    old_min = rm[b].min_val();
    if (rm[b].act(row)) e_hit++; else e_miss++;
    if ((old_min >> W) != (rm[b].min_val() >> W)) n_wrap++;
    check(rm[b].max_diff() < (1 << W), "reference spread fits the counters");
    raa[b]++;
    if (raa[b] == TH) begin raa[b] = 0; at_threshold(b); end
    @(posedge clk); #1;
    sched_valid = 0;
  endtask

  task automatic benign(int n);
    for (int i = 0; i < n; i++) act(int'($urandom_range(0, NB - 1)), int'($urandom_range(0, 63)));
  endtask

  task automatic hammer(int n);
    for (int i = 0; i < n; i++) begin
      int p = int'($urandom_range(0, 9));
      if (p < 7) act(1, (i % 2 == 0) ? 'h10 : 'h12);     // double-sided around row 0x11
      else       act(int'($urandom_range(0, NB - 1)), int'($urandom_range(0, 63)));
    end
  endtask

  initial begin
    rst_n = 0; plus_en = 0; sched_valid = 0; sched_bank = 0; sched_row = 0;
    e_hit = 0; e_miss = 0; e_ref = 0; e_askip = 0; e_rfm = 0; e_pskip = 0;
    o_hit = 0; o_miss = 0; o_ref = 0; o_askip = 0; o_rfm = 0; o_pskip = 0; o_stall = 0;
    n_wrap = 0; n_switch = 0;
    for (int b = 0; b < NB; b++) begin rm[b] = new(N, AD); raa[b] = 0; end
    #12 rst_n = 1;
    benign(1500);
    hammer(1500);
    plus_en = 1; n_switch++;
    benign(1500);
    hammer(1500);
    plus_en = 0; n_switch++;
    benign(200);
    repeat (20) @(negedge clk);
    for (int b = 0; b < NB; b++)
      check(got_vic[b] == exp_vic[b], $sformatf("bank %0d victims: got %0d exp %0d", b, got_vic[b].size(), exp_vic[b].size()));
    check(o_hit == e_hit && o_miss == e_miss, $sformatf("hits %0d/%0d misses %0d/%0d", o_hit, e_hit, o_miss, e_miss));
    check(o_ref == e_ref && o_askip == e_askip, $sformatf("refresh %0d/%0d adaptive skip %0d/%0d", o_ref, e_ref, o_askip, e_askip));
    check(o_rfm == e_rfm && o_pskip == e_pskip, $sformatf("RFM %0d/%0d Mithril+ skip %0d/%0d", o_rfm, e_rfm, o_pskip, e_pskip));
    check(o_rfm + o_pskip == (e_hit + e_miss - raa.sum()) / TH, "one RFM decision per RFM_TH ACTs");
    // every mechanism happened
    checks += 8;
    if (o_hit == 0)    failures++;
    if (o_miss == 0)   failures++;
    if (o_ref == 0)    failures++;
    if (o_askip == 0)  failures++;
    if (o_pskip == 0)  failures++;
    if (o_stall == 0)  failures++;
    if (n_wrap == 0)   failures++;
    if (n_switch == 0) failures++;
    $display("hit=%0d miss=%0d rfm=%0d refresh=%0d adaptive_skip=%0d plus_skip=%0d stall_cycles=%0d wraps=%0d mode_switches=%0d",
             o_hit, o_miss, o_rfm, o_ref, o_askip, o_pskip, o_stall, n_wrap, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
