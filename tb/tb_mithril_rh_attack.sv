// tb_mithril_rh_attack: Row Hammer attack workloads against one full-size
// bank (mithril_bank at its defaults: 256 entries, 12-bit counters,
// AD_TH 200, one victim per side), fed as the memory controller feeds it:
// one RFM after every RFM_TH = 128 ACTs.
//
// The run lasts one refresh window, W RFM intervals, where
//   W = tREFW * (1 - tRFC/tREFI) / (tRC * RFM_TH + tRFM)
// with the DDR5-4800 timings (tREFW 32 ms, tREFI = tREFW/8192, tRFC 295 ns,
// tRC 48.64 ns, tRFM 97.28 ns), 4678 whole intervals or 599K ACTs.  In one
// window auto-refresh cannot be relied on, so the protection must come from
// the preventive refreshes alone.  The window is split into four attacks:
//   1. multi-sided: 33 aggressors two rows apart, in turn, hammering the 32
//      rows between them;
//   2. the same attack with half of the ACTs going to random rows;
//   3. a feint: 300 rows in turn, more than the table holds, around one
//      double-sided pair hit every fourth ACT;
//   4. double-sided: two aggressors around one victim, in turn.
// For every row the testbench counts the ACTs to its two neighbours since
// the row was last emitted as a victim.  That count must stay below the Row
// Hammer threshold FlipTH = 6250 at every ACT.  It must also stay within 2*M,
// where M is the bound on the estimated-count growth per window for this
// table size.  (M is computed with the formula in the README; the small
// margin for AD_TH is left out, since the attacks here keep the spread far
// above AD_TH.)  The testbench also checks that every attack phase causes
// preventive refreshes, and it reports how close each phase came to the
// limit.
module tb_mithril_rh_attack;
  import mithril_pkg::*;

  localparam int    RFM_TH  = 128;
  localparam int    N_ENTRY = 256;
  localparam int    FLIP_TH = 6250;
  localparam real   T_REFW  = 32.0e-3;
  localparam real   T_REFI  = T_REFW / 8192.0;
  localparam real   T_RFC   = 295.0e-9;
  localparam real   T_RC    = 48.64e-9;
  localparam real   T_RFM   = 97.28e-9;

  logic clk = 1'b0;
  logic rst_n;
  logic cmd_valid, cmd_is_rfm, ready, pref_valid, mr_flag;
  row_t cmd_row, pref_row;
  logic [7:0]  max_ptr, min_ptr;
  logic [11:0] min_val, max_diff;
  logic ev_hit, ev_miss, ev_refresh, ev_skip;

  mithril_bank dut (
    .clk, .rst_n, .cmd_valid, .cmd_is_rfm, .cmd_row, .ready,
    .pref_valid, .pref_row, .mr_flag, .max_ptr, .min_ptr, .min_val, .max_diff,
    .ev_hit, .ev_miss, .ev_refresh, .ev_skip
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int disturb [65536];      // neighbour ACTs since the row was last refreshed
  int worst_phase;
  int n_ref, n_skip, n_vic;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // bound M on the per-window growth of an estimated count
  function automatic real bound_m(int n, int r, real w);
    real m = 0.0;
    for (int k = 1; k <= n; k++) m += real'(r) / real'(k);
    return m + real'(r) / real'(n) * (w - 2.0);
  endfunction

  // victims are counted as refreshed the cycle they are emitted
  always @(posedge clk) begin
    if (rst_n && pref_valid) begin
      disturb[int'(pref_row)] = 0;
      n_vic++;
    end
  end

  task automatic act(input int row, input int limit);
    @(negedge clk);
    cmd_valid  = 1'b1;
    cmd_is_rfm = 1'b0;
    cmd_row    = row_t'(row);
    @(negedge clk);
    cmd_valid  = 1'b0;
    for (int v = row - 1; v <= row + 1; v += 2) begin
      if (v >= 0 && v <= 65535) begin
        disturb[v]++;
        if (disturb[v] > worst_phase) worst_phase = disturb[v];
        check(disturb[v] < limit,
              $sformatf("row %0h saw %0d neighbour ACTs without a refresh", v, disturb[v]));
      end
    end
    while (!ready) @(negedge clk);
  endtask

  task automatic rfm();
    @(negedge clk);
    cmd_valid  = 1'b1;
    cmd_is_rfm = 1'b1;
    #1;
    if (ev_refresh) n_ref++;
    if (ev_skip)    n_skip++;
    @(negedge clk);
    cmd_valid  = 1'b0;
    while (!ready) @(negedge clk);
  endtask

  function automatic int pick(int phase, int i);
    case (phase)
      0: return 16'h4000 + 2 * (i % 33);
      1: return (i % 2 == 0) ? 16'h4000 + 2 * ((i / 2) % 33)
                             : int'($urandom_range(0, 65535));
      2: return (i % 4 == 0) ? 16'h8000 + 2 * ((i / 4) % 2)
                             : 16'h9000 + 2 * (i % 300);
      default: return 16'hC000 + 2 * (i % 2);
    endcase
  endfunction

  initial begin
    real w, m;
    int  w_int, per_phase, limit;
    string names [4] = '{"multi-sided (33 aggressors)", "multi-sided + random",
                         "300-row feint + double-sided", "double-sided"};

    w     = T_REFW * (1.0 - T_RFC / T_REFI) / (T_RC * real'(RFM_TH) + T_RFM);
    m     = bound_m(N_ENTRY, RFM_TH, w);
    w_int = int'($floor(w));
    limit = (2 * int'($ceil(m)) < FLIP_TH) ? 2 * int'($ceil(m)) : FLIP_TH;
    per_phase = w_int / 4;
    $display("window: W = %0d RFM intervals, M = %0.1f, limit %0d neighbour ACTs",
             w_int, m, limit);
    check(m < real'(FLIP_TH) / 2.0, "the default table size satisfies M < FlipTH/2");

    foreach (disturb[i]) disturb[i] = 0;
    n_vic      = 0;
    cmd_valid  = 1'b0;
    cmd_is_rfm = 1'b0;
    cmd_row    = '0;
    rst_n      = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(ready === 1'b1, "ready after reset");

    for (int ph = 0; ph < 4; ph++) begin
      int i;
      i = 0;
      worst_phase = 0;
      n_ref  = 0;
      n_skip = 0;
      for (int itv = 0; itv < per_phase; itv++) begin
        for (int a = 0; a < RFM_TH; a++) begin
          act(pick(ph, i), limit);
          i++;
        end
        rfm();
      end
      $display("%-30s: %0d ACTs, %0d RFMs refreshed, %0d skipped, worst %0d neighbour ACTs",
               names[ph], i, n_ref, n_skip, worst_phase);
      check(n_ref > 0, $sformatf("%s: preventive refreshes happen", names[ph]));
      check(worst_phase < limit, $sformatf("%s: stays below the limit", names[ph]));
    end
    check(n_vic > 0, "victim rows were emitted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
