// mithril_ctrl: control logic of one bank's Mithril tracker, including the
// MaxPtr and MinPtr registers.
//
// It runs the paper's modified Counter-based Summary algorithm:
//  * ACT row r: if the Address CAM holds r, increment that entry's counter;
//    otherwise overwrite the entry at MinPtr with r and increment its counter
//    (the newcomer inherits the table minimum plus one).
//  * RFM: greedily take the entry at MaxPtr.  If max - min >= AD_TH (adaptive
//    refresh; AD_TH = 0 refreshes on every RFM) emit its victim rows
//    (aggressor +-1 .. +-BLAST_R) for preventive refresh and lower its counter
//    to the table minimum.  Otherwise the RFM is skipped and nothing changes.
//  * mr_flag = (max - min < AD_TH) is the Mithril+ mode-register flag that
//    tells the memory controller the next RFM would be skipped anyway.
//
// Registers: max_ptr, min_ptr (entry indices), min_val (the minimum counter
// value, reference for the wrapping counters) and max_diff (max - min).  They
// are reloaded from the find-max and find-min trees in the cycle after every
// table change.  Ties go to the higher index (see mithril_find_ext), so
// after reset both pointers sit on the last entry and an empty table fills
// from the last entry down.
//
// Timing: a command is accepted when ready is high.  ACT: table updated at
// the accepting edge, pointers one edge later, ready again after 2 cycles.
// Refreshing RFM: table updated at the accepting edge, then 2*BLAST_R cycles
// with one victim on pref_row each (pref_valid low for a victim outside the
// row range), pointers reloaded in the first of them.  Skipped RFM: ready
// stays high.  The paper only requires this to fit in tRC / tRFM; the cycle
// split is this design's choice.
//
// cam_wr_row is the ACT's row wired straight through: it is the data the
// Address CAM stores when a miss replaces the entry at MinPtr.
module mithril_ctrl
  import mithril_pkg::*;
#(
  parameter int unsigned N_ENTRY = 256,
  parameter int unsigned CNT_W   = 12,
  parameter int unsigned AD_TH   = 200,
  parameter int unsigned BLAST_R = 1,
  localparam int unsigned IDX_W  = (N_ENTRY > 1) ? $clog2(N_ENTRY) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // command from the DRAM command decoder
  input  logic             cmd_valid,
  input  logic             cmd_is_rfm,     // 0: ACT, 1: RFM
  input  row_t             cmd_row,
  output logic             ready,
  // Address CAM
  input  logic             cam_match,
  input  logic [IDX_W-1:0] cam_match_idx,
  output logic             cam_wr_en,
  output logic [IDX_W-1:0] cam_wr_idx,
  output row_t             cam_wr_row,
  output logic [IDX_W-1:0] cam_rd_idx,
  input  row_t             cam_rd_row,
  input  logic             cam_rd_valid,
  // Count CAM
  output logic             cnt_inc_en,
  output logic [IDX_W-1:0] cnt_inc_idx,
  output logic             cnt_set_en,
  output logic [IDX_W-1:0] cnt_set_idx,
  output logic [CNT_W-1:0] cnt_set_val,
  // find-max / find-min trees (relative to base = min_val)
  input  logic [IDX_W-1:0] fmax_idx,
  input  logic [CNT_W-1:0] fmax_rel,
  input  logic [IDX_W-1:0] fmin_idx,
  input  logic [CNT_W-1:0] fmin_rel,
  output logic [CNT_W-1:0] base,
  // preventive refresh to the cell array
  output logic             pref_valid,
  output row_t             pref_row,
  // Mithril+ flag and visibility
  output logic             mr_flag,
  output logic [IDX_W-1:0] max_ptr,
  output logic [IDX_W-1:0] min_ptr,
  output logic [CNT_W-1:0] min_val,
  output logic [CNT_W-1:0] max_diff,
  // one-cycle event pulses
  output logic             ev_hit,
  output logic             ev_miss,
  output logic             ev_refresh,
  output logic             ev_skip
);

  typedef enum logic [1:0] {S_IDLE, S_PTR, S_REF} state_e;

  localparam int unsigned NVIC  = 2 * BLAST_R;
  localparam int unsigned VIC_W = (NVIC > 1) ? $clog2(NVIC) : 1;

  state_e           state_q;
  logic [IDX_W-1:0] max_ptr_q, min_ptr_q;
  logic [CNT_W-1:0] min_val_q, max_diff_q;
  row_t             aggr_q;
  logic [VIC_W-1:0] vic_q;

  logic do_act, do_rfm, rfm_refresh, ptr_load;

  assign ready       = (state_q == S_IDLE);
  assign do_act      = ready && cmd_valid && !cmd_is_rfm;
  assign do_rfm      = ready && cmd_valid &&  cmd_is_rfm;
  // adaptive refresh: refresh only when max - min >= AD_TH and the entry is in use
  assign rfm_refresh = do_rfm && cam_rd_valid && (32'(max_diff_q) >= AD_TH);
  assign ptr_load    = (state_q == S_PTR) || (state_q == S_REF && vic_q == '0);

  // table updates
  assign cam_rd_idx  = max_ptr_q;
  assign cam_wr_en   = do_act && !cam_match;
  assign cam_wr_idx  = min_ptr_q;
  assign cam_wr_row  = cmd_row;
  assign cnt_inc_en  = do_act;
  assign cnt_inc_idx = cam_match ? cam_match_idx : min_ptr_q;
  assign cnt_set_en  = rfm_refresh;
  assign cnt_set_idx = max_ptr_q;
  assign cnt_set_val = min_val_q;
  assign base        = min_val_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      max_ptr_q  <= IDX_W'(N_ENTRY - 1);   // what the trees give for an
      min_ptr_q  <= IDX_W'(N_ENTRY - 1);   // empty, all-zero table
      min_val_q  <= '0;
      max_diff_q <= '0;
      aggr_q     <= '0;
      vic_q      <= '0;
    end else begin
      if (ptr_load) begin
        max_ptr_q  <= fmax_idx;
        min_ptr_q  <= fmin_idx;
        min_val_q  <= min_val_q + fmin_rel;
        max_diff_q <= fmax_rel - fmin_rel;
      end
      unique case (state_q)
        S_IDLE: begin
          if (do_act) begin
            state_q <= S_PTR;
          end else if (rfm_refresh) begin
            state_q <= S_REF;
            aggr_q  <= cam_rd_row;
            vic_q   <= '0;
          end
        end
        S_PTR: state_q <= S_IDLE;
        S_REF: begin
          if (32'(vic_q) == NVIC - 1) state_q <= S_IDLE;
          else                        vic_q   <= vic_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // victim k of 0..2R-1: aggressor-R .. aggressor-1, aggressor+1 .. aggressor+R
  logic signed [ROW_W+1:0] vic_row;
  always_comb begin
    if (32'(vic_q) < BLAST_R)
      vic_row = $signed({2'b00, aggr_q}) - $signed((ROW_W+2)'(BLAST_R - 32'(vic_q)));
    else
      vic_row = $signed({2'b00, aggr_q}) + $signed((ROW_W+2)'(32'(vic_q) - BLAST_R + 1));
  end
  assign pref_valid = (state_q == S_REF) && (vic_row >= 0) && (vic_row < (1 << ROW_W));
  assign pref_row   = vic_row[ROW_W-1:0];

  assign mr_flag  = 32'(max_diff_q) < AD_TH;
  assign max_ptr  = max_ptr_q;
  assign min_ptr  = min_ptr_q;
  assign min_val  = min_val_q;
  assign max_diff = max_diff_q;

  assign ev_hit     = do_act &&  cam_match;
  assign ev_miss    = do_act && !cam_match;
  assign ev_refresh = rfm_refresh;
  assign ev_skip    = do_rfm && !rfm_refresh;

  // a command may only arrive while the bank logic is ready
  a_cmd_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> ready);

endmodule
