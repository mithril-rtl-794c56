// tb_bank_drv: drives one mithril_bank instance and checks it against the
// reference model.  Used by tb_mithril_bank, which instantiates it twice
// with different parameters.
//
// FIG5 = 1 first replays the worked example of the Mithril paper (a 4-entry
// table holding 0xA0:9, 0xB0:9, 0xC0:3, 0xD0:1, then ACT 0xA0, ACT 0xE0,
// RFM) and checks every printed value, including where MaxPtr and MinPtr
// sit on the two ties the example shows.  Then N_CMD random commands follow:
// an RFM after every RFM_TH ACTs, ACT rows drawn mostly from a few hot rows
// and from the edges of the row range.  After every command the testbench
// checks the event reported, the victim rows emitted, the command latency
// (ACT 2 cycles, refreshing RFM 1 + 2*BLAST_R, skipped RFM 1), the pointer
// registers, the minimum, max-minus-min, the Mithril+ flag and, through
// hierarchical references, the content of both CAMs.
module tb_bank_drv
  import mithril_pkg::*;
  import mithril_ref_pkg::*;
#(
  parameter int unsigned N_ENTRY = 8,
  parameter int unsigned CNT_W   = 6,
  parameter int unsigned AD_TH   = 4,
  parameter int unsigned BLAST_R = 1,
  parameter int unsigned RFM_TH  = 4,
  parameter int unsigned N_CMD   = 2000,
  parameter bit          FIG5    = 1'b0
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_hit,
  output int   n_miss,
  output int   n_ref,
  output int   n_skip,
  output int   n_wrap
);

  localparam int unsigned IDX_W = (N_ENTRY > 1) ? $clog2(N_ENTRY) : 1;
  localparam longint MASK = (64'd1 << CNT_W) - 1;

  logic rst_n, cmd_valid, cmd_is_rfm, ready, pref_valid, mr_flag;
  row_t cmd_row, pref_row;
  logic [IDX_W-1:0] max_ptr, min_ptr;
  logic [CNT_W-1:0] min_val, max_diff;
  logic ev_hit, ev_miss, ev_refresh, ev_skip;

  mithril_bank #(.N_ENTRY(N_ENTRY), .CNT_W(CNT_W), .AD_TH(AD_TH), .BLAST_R(BLAST_R)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_is_rfm, .cmd_row, .ready,
    .pref_valid, .pref_row, .mr_flag, .max_ptr, .min_ptr, .min_val, .max_diff,
    .ev_hit, .ev_miss, .ev_refresh, .ev_skip
  );

  mithril_ref ref_m;
  logic [CNT_W-1:0] prev_min;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [N=%0d AD=%0d] %s", N_ENTRY, AD_TH, what);
    end
  endtask

  task automatic check_state();
    check(max_ptr == IDX_W'(ref_m.max_ptr), $sformatf("max_ptr %0d exp %0d", max_ptr, ref_m.max_ptr));
    check(min_ptr == IDX_W'(ref_m.min_ptr), $sformatf("min_ptr %0d exp %0d", min_ptr, ref_m.min_ptr));
    check(64'(min_val) == (ref_m.min_val() & MASK), "min_val");
    check(64'(max_diff) == ref_m.max_diff(), $sformatf("max_diff %0d exp %0d", max_diff, ref_m.max_diff()));
    check(mr_flag == ref_m.flag(), "mr_flag");
    for (int i = 0; i < N_ENTRY; i++) begin
      check(dut.u_addr_cam.valid_q[i] == ref_m.valid[i], $sformatf("valid[%0d]", i));
      if (ref_m.valid[i])
        check(32'(dut.u_addr_cam.addr_q[i]) == ref_m.addr[i], $sformatf("addr[%0d]", i));
      check(64'(dut.u_count_cam.counts[i]) == (ref_m.cnt[i] & MASK), $sformatf("cnt[%0d]", i));
    end
    if (min_val < prev_min) n_wrap++;
    prev_min = min_val;
  endtask

  // issue one command and check everything it does; returns the aggressor on refresh
  task automatic issue(input bit rfm, input int row, output bit refreshed, output int aggr);
    int  lat;
    bit  exp_hit, exp_ref;
    int  exp_vic[$];
    int  got_vic[$];
    lat  = 0;
    aggr = -1;
    check(ready === 1'b1, "ready before command");
    @(negedge clk);
    cmd_valid  = 1'b1;
    cmd_is_rfm = rfm;
    cmd_row    = row_t'(row);
    #1;
    if (!rfm) begin
      exp_hit = ref_m.act(row);
      exp_ref = 0;
      check(ev_hit == exp_hit && ev_miss == !exp_hit && !ev_refresh && !ev_skip,
            $sformatf("ACT %0h event hit=%0b miss=%0b exp hit=%0b", row, ev_hit, ev_miss, exp_hit));
      if (exp_hit) n_hit++; else n_miss++;
    end else begin
      exp_ref = ref_m.rfm(aggr);
      check(ev_refresh == exp_ref && ev_skip == !exp_ref && !ev_hit && !ev_miss, "RFM event");
      if (exp_ref) begin
        n_ref++;
        for (int k = 1; k <= BLAST_R; k++) if (aggr - (int'(BLAST_R) + 1 - k) >= 0) exp_vic.push_back(aggr - (int'(BLAST_R) + 1 - k));
        for (int k = 1; k <= BLAST_R; k++) if (aggr + k <= 65535) exp_vic.push_back(aggr + k);
      end else n_skip++;
    end
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!ready && lat < 100) begin
      if (pref_valid) got_vic.push_back(int'(pref_row));
      @(negedge clk);
      lat++;
    end
    check(got_vic == exp_vic, $sformatf("victims of %0h: got %p exp %p", aggr, got_vic, exp_vic));
    if (!rfm)         check(lat == 2, $sformatf("ACT latency %0d", lat));
    else if (exp_ref) check(lat == 1 + 2 * int'(BLAST_R), $sformatf("RFM latency %0d", lat));
    else              check(lat == 1, $sformatf("skipped RFM latency %0d", lat));
    refreshed = exp_ref;
    check_state();
  endtask

  int hot[8] = '{16'h0040, 16'h0041, 16'h0100, 16'h0000, 16'hFFFF, 16'h0200, 16'h0201, 16'h0300};

  initial begin
    bit r;
    int a, acts, row;
    done = 0; checks = 0; failures = 0;
    n_hit = 0; n_miss = 0; n_ref = 0; n_skip = 0; n_wrap = 0;
    rst_n = 0; cmd_valid = 0; cmd_is_rfm = 0; cmd_row = '0; prev_min = '0;
    ref_m = new(N_ENTRY, AD_TH);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_state();

    if (FIG5) begin
      // build the first table of the example in its printed order (entry 0
      // to 3: 0xA0:9, 0xB0:9, 0xC0:3, 0xD0:1).  An empty table fills from the
      // last entry down, because the minimum tie goes to the higher index.
      issue(0, 'hD0, r, a);
      repeat (3) issue(0, 'hC0, r, a);
      repeat (9) issue(0, 'hB0, r, a);
      repeat (9) issue(0, 'hA0, r, a);
      check(ref_m.estimate('hD0) == 1 && ref_m.estimate('hB0) == 9, "fig5 initial table");
      check(32'(dut.u_addr_cam.addr_q[0]) == 'hA0 && 32'(dut.u_addr_cam.addr_q[3]) == 'hD0,
            "fig5: table in the printed order");
      check(32'(dut.u_addr_cam.addr_q[max_ptr]) == 'hB0, "fig5: MaxPtr on 0xB0 (tie with 0xA0)");
      check(32'(dut.u_addr_cam.addr_q[min_ptr]) == 'hD0 && 64'(min_val) == 1,
            "fig5: MinPtr on 0xD0 with 1");
      // ACT 0xA0: hit, 0xA0 becomes 10 and the maximum
      issue(0, 'hA0, r, a);
      check(32'(dut.u_addr_cam.addr_q[max_ptr]) == 'hA0 && dut.u_count_cam.counts[max_ptr] == 10,
            "fig5: after ACT 0xA0, MaxPtr -> 0xA0 with 10");
      // ACT 0xE0: miss, replaces 0xD0 (the minimum) and becomes 2
      issue(0, 'hE0, r, a);
      check(ref_m.estimate('hD0) == 2 && 32'(dut.u_addr_cam.addr_q[min_ptr]) == 'hE0 &&
            dut.u_count_cam.counts[min_ptr] == 2, "fig5: after ACT 0xE0, 0xE0 replaces 0xD0 with 2, MinPtr -> 0xE0");
      // RFM: refresh the victims of 0xA0, 0xA0 drops to the minimum 2, MaxPtr -> 0xB0 (9)
      issue(1, 0, r, a);
      check(r && a == 'hA0, "fig5: RFM refreshes victims of 0xA0");
      check(ref_m.estimate('hA0) == 2, "fig5: 0xA0 count lowered to 2");
      check(32'(dut.u_addr_cam.addr_q[max_ptr]) == 'hB0 && dut.u_count_cam.counts[max_ptr] == 9,
            "fig5: MaxPtr -> 0xB0 with 9");
      check(64'(min_val) == 2 && 32'(dut.u_addr_cam.addr_q[min_ptr]) == 'hE0,
            "fig5: MinPtr stays on 0xE0 (2, tie with 0xA0)");
    end

    acts = 0;
    for (int c = 0; c < N_CMD; c++) begin
      if (acts == int'(RFM_TH)) begin
        issue(1, 0, r, a);
        acts = 0;
      end else begin
        int p;
        p = int'($urandom_range(0, 99));
        if (p < 40)      row = hot[$urandom_range(0, 2)];
        else if (p < 55) row = hot[$urandom_range(3, 7)];
        else             row = int'($urandom_range(0, 40));
        issue(0, row, r, a);
        acts++;
      end
      check(ref_m.max_diff() < MASK, "reference max-min stays inside the counter range");
    end
    done = 1;
  end

endmodule
