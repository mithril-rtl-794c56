// tb_mithril_find_ext: self-checking testbench of the find-max / find-min
// trees.  13 entries (not a power of two) of 6-bit counters are given random
// values within 0..40 above a random base, stored modulo 64 so many of them
// wrap past zero, with frequent ties.  The expected index (highest on a tie)
// and distance above the base are computed with plain integers.
module tb_mithril_find_ext;
  localparam int N = 13, W = 6;
  logic [W-1:0] counts [N];
  logic [W-1:0] base;
  logic [3:0]   max_idx, min_idx;
  logic [W-1:0] max_rel, min_rel;

  mithril_find_ext #(.N_ENTRY(N), .CNT_W(W), .FIND_MAX(1'b1)) u_max (
    .counts, .base, .ext_idx(max_idx), .ext_rel(max_rel));
  mithril_find_ext #(.N_ENTRY(N), .CNT_W(W), .FIND_MAX(1'b0)) u_min (
    .counts, .base, .ext_idx(min_idx), .ext_rel(min_rel));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    int rel [N];
    int emax, emin;
    for (int it = 0; it < 5000; it++) begin
      int b, span;
      b    = int'($urandom_range(0, 63));
      span = (it % 3 == 0) ? 3 : 40;
      base = W'(b);
      foreach (rel[i]) begin
        rel[i]    = int'($urandom_range(0, span));
        counts[i] = W'((b + rel[i]) % 64);
      end
      emax = 0; emin = 0;
      for (int i = 1; i < N; i++) begin
        if (rel[i] >= rel[emax]) emax = i;
        if (rel[i] <= rel[emin]) emin = i;
      end
      #1;
      check(int'(max_idx) == emax && int'(max_rel) == rel[emax],
            $sformatf("max got %0d/%0d exp %0d/%0d", max_idx, max_rel, emax, rel[emax]));
      check(int'(min_idx) == emin && int'(min_rel) == rel[emin],
            $sformatf("min got %0d/%0d exp %0d/%0d", min_idx, min_rel, emin, rel[emin]));
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
