// mithril_bank: one DRAM bank's complete Mithril logic.
//
// Wires the Address CAM, the Count CAM, a find-max tree, a find-min tree and
// the control logic (which holds MaxPtr and MinPtr) together, as in the
// paper's per-bank block diagram.  The bank accepts ACT (with a row) and RFM
// (without) commands while 'ready' is high, and answers an RFM by emitting
// the victim rows of the most-activated tracked row on pref_valid/pref_row.
// See mithril_ctrl for the algorithm and the cycle timing.
//
// The structure follows the paper; the separate find-min tree is this
// design's addition (the paper names only a find-max block).
module mithril_bank
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
  input  logic             cmd_valid,
  input  logic             cmd_is_rfm,
  input  row_t             cmd_row,
  output logic             ready,
  output logic             pref_valid,
  output row_t             pref_row,
  output logic             mr_flag,
  output logic [IDX_W-1:0] max_ptr,
  output logic [IDX_W-1:0] min_ptr,
  output logic [CNT_W-1:0] min_val,
  output logic [CNT_W-1:0] max_diff,
  output logic             ev_hit,
  output logic             ev_miss,
  output logic             ev_refresh,
  output logic             ev_skip
);

  logic             cam_match, cam_wr_en, cam_rd_valid;
  logic [IDX_W-1:0] cam_match_idx, cam_wr_idx, cam_rd_idx;
  row_t             cam_wr_row, cam_rd_row;
  logic             cnt_inc_en, cnt_set_en;
  logic [IDX_W-1:0] cnt_inc_idx, cnt_set_idx;
  logic [CNT_W-1:0] cnt_set_val, base;
  logic [CNT_W-1:0] counts [N_ENTRY];
  logic [IDX_W-1:0] fmax_idx, fmin_idx;
  logic [CNT_W-1:0] fmax_rel, fmin_rel;

  mithril_addr_cam #(.N_ENTRY(N_ENTRY)) u_addr_cam (
    .clk, .rst_n,
    .search_row (cmd_row),
    .match      (cam_match),
    .match_idx  (cam_match_idx),
    .wr_en      (cam_wr_en),
    .wr_idx     (cam_wr_idx),
    .wr_row     (cam_wr_row),
    .rd_idx     (cam_rd_idx),
    .rd_row     (cam_rd_row),
    .rd_valid   (cam_rd_valid)
  );

  mithril_count_cam #(.N_ENTRY(N_ENTRY), .CNT_W(CNT_W)) u_count_cam (
    .clk, .rst_n,
    .inc_en  (cnt_inc_en),
    .inc_idx (cnt_inc_idx),
    .set_en  (cnt_set_en),
    .set_idx (cnt_set_idx),
    .set_val (cnt_set_val),
    .counts  (counts)
  );

  mithril_find_ext #(.N_ENTRY(N_ENTRY), .CNT_W(CNT_W), .FIND_MAX(1'b1)) u_find_max (
    .counts, .base, .ext_idx(fmax_idx), .ext_rel(fmax_rel)
  );

  mithril_find_ext #(.N_ENTRY(N_ENTRY), .CNT_W(CNT_W), .FIND_MAX(1'b0)) u_find_min (
    .counts, .base, .ext_idx(fmin_idx), .ext_rel(fmin_rel)
  );

  mithril_ctrl #(.N_ENTRY(N_ENTRY), .CNT_W(CNT_W), .AD_TH(AD_TH), .BLAST_R(BLAST_R)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_is_rfm, .cmd_row, .ready,
    .cam_match, .cam_match_idx, .cam_wr_en, .cam_wr_idx, .cam_wr_row,
    .cam_rd_idx, .cam_rd_row, .cam_rd_valid,
    .cnt_inc_en, .cnt_inc_idx, .cnt_set_en, .cnt_set_idx, .cnt_set_val,
    .fmax_idx, .fmax_rel, .fmin_idx, .fmin_rel, .base,
    .pref_valid, .pref_row, .mr_flag,
    .max_ptr, .min_ptr, .min_val, .max_diff,
    .ev_hit, .ev_miss, .ev_refresh, .ev_skip
  );

endmodule
