// tb_mithril_dram: self-checking testbench of the DRAM-side command decoder
// with its per-bank Mithril logic and Mithril+ mode register.
//
// Three banks of 4 entries, 8-bit counters, adaptive threshold 2.  Random
// ACT, RFM and MRR commands go to random banks as soon as the addressed bank
// is ready; one reference model per bank predicts each bank's events, the
// victim rows that must appear on that bank's own preventive-refresh port,
// and the MRR data.  The testbench also checks that a busy bank stalls only
// commands to itself.
module tb_mithril_dram;
  import mithril_pkg::*;
  import mithril_ref_pkg::*;
  localparam int NB = 3, N = 4, AD = 2;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, mrr_rsp_valid, mrr_rsp_flag;
  ddr_cmd_t cmd;
  logic [NB-1:0] pref_valid, mr_flags, ev_hit, ev_miss, ev_refresh, ev_skip;
  row_t pref_row [NB];

  mithril_dram #(.NUM_BANKS(NB), .N_ENTRY(N), .CNT_W(8), .AD_TH(AD), .BLAST_R(1)) dut (.*);

  mithril_ref rm [NB];
  int exp_vic [NB][$];
  int got_vic [NB][$];
  int checks = 0, failures = 0;
  int n_par = 0, n_mrr = 0, n_ref = 0, n_skip = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  always @(negedge clk)
    for (int b = 0; b < NB; b++) if (pref_valid[b]) got_vic[b].push_back(int'(pref_row[b]));

  // drive one command in the current cycle (caller is at a negedge)
  task automatic drive(cmd_e op, int b, int row);
    int aggr;
    bit hit, rf;
    cmd_valid = 1; cmd = '{op: op, bank: bank_t'(b), row: row_t'(row)};
    #1;
    check(cmd_ready, "addressed bank ready");
    unique case (op)
      CMD_ACT: begin
        hit = rm[b].act(row);
        check(ev_hit == NB'(hit) << b && ev_miss == NB'(!hit) << b, $sformatf("ACT events bank %0d", b));
      end
      CMD_RFM: begin
        rf = rm[b].rfm(aggr);
        check(ev_refresh == NB'(rf) << b && ev_skip == NB'(!rf) << b, $sformatf("RFM events bank %0d", b));
        if (rf) begin
          n_ref++;
          if (aggr > 0) exp_vic[b].push_back(aggr - 1);
          if (aggr < 65535) exp_vic[b].push_back(aggr + 1);
        end else n_skip++;
      end
      CMD_MRR: begin
        n_mrr++;
        fork
          begin
            automatic bit ef = rm[b].flag();
            @(negedge clk);
            check(mrr_rsp_valid && mrr_rsp_flag == ef, $sformatf("MRR bank %0d flag", b));
          end
        join_none
      end
      default: ;
    endcase
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0;
    for (int b = 0; b < NB; b++) rm[b] = new(N, AD);
    #12 rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 4000; it++) begin
      int b, p, row;
      cmd_e op;
      b   = int'($urandom_range(0, NB - 1));
      p   = int'($urandom_range(0, 99));
      op  = (p < 75) ? CMD_ACT : (p < 93) ? CMD_RFM : CMD_MRR;
      row = ($urandom_range(0, 1) == 1) ? int'($urandom_range(0, 2)) : int'($urandom_range(0, 20));
      // wait for the addressed bank
      while (!dut.bank_ready[b]) @(negedge clk);
      drive(op, b, row);
      @(negedge clk);
      cmd_valid = 0;
      // right after an ACT, that bank is busy while another idle bank still accepts
      if (op == CMD_ACT) begin
        int o = (b + 1) % NB;
        cmd = '{op: CMD_ACT, bank: bank_t'(b), row: '0};
        #1 check(!cmd_ready, "busy bank stalls its commands");
        if (dut.bank_ready[o]) begin
          n_par++;
          drive(CMD_ACT, o, int'($urandom_range(0, 20)));
          @(negedge clk);
          cmd_valid = 0;
        end
      end
    end
    repeat (10) @(negedge clk);
    for (int b = 0; b < NB; b++)
      check(got_vic[b] == exp_vic[b], $sformatf("bank %0d victims: %0d got, %0d expected", b, got_vic[b].size(), exp_vic[b].size()));
    checks += 4;
    if (n_par == 0) failures++;
    if (n_mrr == 0) failures++;
    if (n_ref == 0) failures++;
    if (n_skip == 0) failures++;
    $display("parallel=%0d mrr=%0d refresh=%0d skip=%0d", n_par, n_mrr, n_ref, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
