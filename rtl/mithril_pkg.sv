// mithril_pkg: types and constants shared by the Mithril Row Hammer tracker.
//
// The memory controller and the DRAM talk over an abstract command channel
// (ddr_cmd_t): an opcode (ACT, RFM or MRR), a bank and a row.  The DDR5
// command encoding and the PHY are not modelled; only what the tracker needs
// is carried.  ROW_W and BANK_W are fixed here because the struct is shared;
// the number of banks actually used is a parameter of each module.
//
// ROW_W = 16 (64K rows per bank, as in a 16 Gb DDR5 device) is this design's
// choice; BANK_W = 5 covers the 32 banks per rank of the evaluated DDR5 system.
package mithril_pkg;

  localparam int unsigned ROW_W  = 16;
  localparam int unsigned BANK_W = 5;

  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [BANK_W-1:0] bank_t;

  typedef enum logic [1:0] {
    CMD_NOP = 2'd0,
    CMD_ACT = 2'd1,   // activate row 'row' of bank 'bank'
    CMD_RFM = 2'd2,   // refresh management for 'bank' (no row)
    CMD_MRR = 2'd3    // mode register read of 'bank''s Mithril+ flag
  } cmd_e;

  typedef struct packed {
    cmd_e  op;
    bank_t bank;
    row_t  row;
  } ddr_cmd_t;

endpackage
