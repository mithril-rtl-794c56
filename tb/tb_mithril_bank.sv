// tb_mithril_bank: self-checking testbench of one bank's Mithril logic.
//
// Instance A: 4 entries, adaptive threshold 0, replays the paper's worked
// example then runs random traffic.  Instance B: 8 entries, 6-bit counters
// (they wrap many times), adaptive threshold 4 and two victims per side,
// random traffic with an RFM every 4 ACTs.  Both are checked command by
// command against the reference model (see tb_bank_drv).
module tb_mithril_bank;
  logic clk = 0;
  always #5 clk = ~clk;

  logic done_a, done_b;
  int ca, fa, cb, fb;
  int ha, ma, ra, sa, wa, hb, mb, rb, sb, wb;

  tb_bank_drv #(.N_ENTRY(4), .CNT_W(12), .AD_TH(0), .BLAST_R(1), .RFM_TH(4),
                .N_CMD(600), .FIG5(1'b1)) u_a (
    .clk, .done(done_a), .checks(ca), .failures(fa),
    .n_hit(ha), .n_miss(ma), .n_ref(ra), .n_skip(sa), .n_wrap(wa));

  tb_bank_drv #(.N_ENTRY(8), .CNT_W(6), .AD_TH(4), .BLAST_R(2), .RFM_TH(4),
                .N_CMD(3000), .FIG5(1'b0)) u_b (
    .clk, .done(done_b), .checks(cb), .failures(fb),
    .n_hit(hb), .n_miss(mb), .n_ref(rb), .n_skip(sb), .n_wrap(wb));

  int checks, failures;

  initial begin
    @(posedge clk);
    wait (done_a && done_b);
    checks   = ca + cb + 4;
    failures = fa + fb;
    // every mechanism must have happened
    if (ha == 0 || hb == 0) failures++;
    if (ma == 0 || mb == 0) failures++;
    if (ra == 0 || rb == 0) failures++;
    if (sb == 0 || wb == 0) failures++;
    $display("A: hit=%0d miss=%0d refresh=%0d skip=%0d | B: hit=%0d miss=%0d refresh=%0d skip=%0d wraps=%0d",
             ha, ma, ra, sa, hb, mb, rb, sb, wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1);
    $finish;
  end
endmodule
