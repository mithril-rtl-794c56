// tb_mithril_count_cam: self-checking testbench of the Count CAM.
// Eight 4-bit counters receive random increments and overwrites, often in
// the same cycle; a shadow array with explicit modulo-16 arithmetic predicts
// every counter after each clock edge, so wrap-around is exercised.
module tb_mithril_count_cam;
  localparam int N = 8, W = 4;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  logic inc_en, set_en;
  logic [2:0] inc_idx, set_idx;
  logic [W-1:0] set_val;
  logic [W-1:0] counts [N];

  mithril_count_cam #(.N_ENTRY(N), .CNT_W(W)) dut (.*);

  int sv [N];
  int checks = 0, failures = 0, wraps = 0;

  initial begin
    rst_n = 0; inc_en = 0; set_en = 0; inc_idx = 0; set_idx = 0; set_val = 0;
    foreach (sv[i]) sv[i] = 0;
    #12 rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      inc_en  = ($urandom_range(0, 3) != 0);
      inc_idx = 3'($urandom_range(0, N - 1));
      set_en  = ($urandom_range(0, 7) == 0);
      set_idx = 3'($urandom_range(0, N - 1));
      set_val = W'($urandom_range(0, 15));
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (set_en && int'(set_idx) == i) sv[i] = int'(set_val);
        else if (inc_en && int'(inc_idx) == i) begin
          if (sv[i] == 15) wraps++;
          sv[i] = (sv[i] + 1) % 16;
        end
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(counts[i]) != sv[i]) begin
          failures++;
          if (failures < 20) $display("FAIL cnt[%0d]=%0d exp %0d", i, counts[i], sv[i]);
        end
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
