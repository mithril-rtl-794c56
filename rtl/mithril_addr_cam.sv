// mithril_addr_cam: the row-address half of the Mithril table.
//
// Each of the N_ENTRY entries holds one tracked row address and a valid bit.
// A lookup compares search_row with every valid entry in parallel and reports
// whether one matches and, through a lowest-index priority encoder, which.
// The control logic overwrites one entry (wr_*) when an activated row misses
// and evicts the entry at MinPtr, and reads one entry (rd_*) to learn the
// aggressor row at MaxPtr on an RFM.
//
// Timing: match/match_idx and rd_row are combinational from the stored
// state; a write takes effect at the next rising clock edge.  Reset clears
// every valid bit so an empty table matches nothing.
//
// The paper specifies a CAM storing the row addresses; the parallel compare,
// the valid bits and the read port are this design's choices.
module mithril_addr_cam
  import mithril_pkg::*;
#(
  parameter int unsigned N_ENTRY = 256,
  localparam int unsigned IDX_W  = (N_ENTRY > 1) ? $clog2(N_ENTRY) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  row_t             search_row,
  output logic             match,
  output logic [IDX_W-1:0] match_idx,
  // replace one entry
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_idx,
  input  row_t             wr_row,
  // read one entry
  input  logic [IDX_W-1:0] rd_idx,
  output row_t             rd_row,
  output logic             rd_valid
);

  row_t               addr_q  [N_ENTRY];
  logic [N_ENTRY-1:0] valid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (wr_en) begin
      valid_q[wr_idx] <= 1'b1;
    end
  end

  // address storage needs no reset: an entry is only read while valid
  always_ff @(posedge clk) begin
    if (wr_en) addr_q[wr_idx] <= wr_row;
  end

  logic [N_ENTRY-1:0] hit_vec;
  always_comb begin
    for (int unsigned i = 0; i < N_ENTRY; i++)
      hit_vec[i] = valid_q[i] && (addr_q[i] == search_row);
  end

  always_comb begin
    match     = |hit_vec;
    match_idx = '0;
    for (int i = N_ENTRY - 1; i >= 0; i--)
      if (hit_vec[i]) match_idx = IDX_W'(i);
  end

  assign rd_row   = addr_q[rd_idx];
  assign rd_valid = valid_q[rd_idx];

endmodule
