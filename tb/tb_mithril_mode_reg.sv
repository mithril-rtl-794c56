// tb_mithril_mode_reg: self-checking testbench of the Mithril+ mode
// register.  Random per-bank flags change every cycle; random MRRs (some to
// banks beyond NUM_BANKS) must return, one cycle later, the flag the named
// bank had at the MRR edge.
module tb_mithril_mode_reg;
  import mithril_pkg::*;
  localparam int NB = 6;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic [NB-1:0] flags;
  logic mrr_valid, rsp_valid, rsp_flag;
  bank_t mrr_bank;

  mithril_mode_reg #(.NUM_BANKS(NB)) dut (.*);

  int checks = 0, failures = 0;
  bit exp_v, exp_f;

  initial begin
    rst_n = 0; flags = '0; mrr_valid = 0; mrr_bank = '0;
    exp_v = 0; exp_f = 0;
    #12 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      flags     = NB'($urandom());
      mrr_valid = ($urandom_range(0, 1) == 1);
      mrr_bank  = bank_t'($urandom_range(0, 7));
      @(posedge clk);
      exp_v = mrr_valid;
      if (mrr_valid) exp_f = (int'(mrr_bank) < NB) ? flags[mrr_bank] : 1'b0;
      #1;
      checks++;
      if (rsp_valid != exp_v || (exp_v && rsp_flag != exp_f)) begin
        failures++;
        if (failures < 20) $display("FAIL MRR bank %0d: got %0b/%0b exp %0b/%0b", mrr_bank, rsp_valid, rsp_flag, exp_v, exp_f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
