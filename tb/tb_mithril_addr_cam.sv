// tb_mithril_addr_cam: self-checking testbench of the Address CAM.
// A 16-entry CAM receives random writes (including the same row written to
// two entries, to check the lowest-index priority) and random lookups; a
// shadow array predicts match, match_idx and the read port.  A final reset
// must make every stored row miss again.  Lookup results
// are combinational, writes visible after one clock edge.
module tb_mithril_addr_cam;
  import mithril_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  row_t search_row, wr_row, rd_row;
  logic match, wr_en, rd_valid;
  logic [3:0] match_idx, wr_idx, rd_idx;

  mithril_addr_cam #(.N_ENTRY(N)) dut (.*);

  bit   sv_valid [N];
  int   sv_addr  [N];
  int   checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic lookup(int row);
    int exp_idx = -1;
    search_row = row_t'(row);
    for (int i = N - 1; i >= 0; i--) if (sv_valid[i] && sv_addr[i] == row) exp_idx = i;
    #1;
    check(match == (exp_idx >= 0), $sformatf("match row %0h", row));
    if (exp_idx >= 0) check(int'(match_idx) == exp_idx, $sformatf("match_idx row %0h got %0d exp %0d", row, match_idx, exp_idx));
  endtask

  initial begin
    rst_n = 0; wr_en = 0; wr_idx = 0; wr_row = 0; rd_idx = 0; search_row = 0;
    foreach (sv_valid[i]) begin sv_valid[i] = 0; sv_addr[i] = 0; end
    #12 rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 8; r++) lookup(r);          // empty table matches nothing
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      if ($urandom_range(0, 2) == 0) begin
        wr_en  = 1;
        wr_idx = 4'($urandom_range(0, N - 1));
        wr_row = row_t'($urandom_range(0, 40));
        @(posedge clk); #1;
        sv_valid[wr_idx] = 1; sv_addr[wr_idx] = int'(wr_row);
        wr_en = 0;
      end
      lookup(int'($urandom_range(0, 40)));
      rd_idx = 4'($urandom_range(0, N - 1));
      #1;
      check(rd_valid == sv_valid[rd_idx], "rd_valid");
      if (sv_valid[rd_idx]) check(int'(rd_row) == sv_addr[rd_idx], "rd_row");
    end
    // reset clears the valid bits: stored addresses must no longer match
    @(negedge clk);
    rst_n = 0;
    #1 rst_n = 1;
    foreach (sv_valid[i]) sv_valid[i] = 0;
    for (int r = 0; r <= 40; r++) lookup(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
