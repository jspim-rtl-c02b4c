// jspim_pkg: types and constants shared by the JSPIM rank.
//
// Keys and values are 32 bits wide, the width used for the synthetic
// R-join-S comparison with the UPMEM joins (no compression). The PIM chip
// stores, per hash-table slot, a valid bit, a duplicate flag, the key bits
// that are not used to pick the bucket (the "tag") and the value. The
// duplicate flag is the extra value bit that tells the host whether the
// value is a dimension-table row index or a pointer into the duplication
// list kept in host memory; the hardware only carries it.
//
// Host commands are 64-byte writes (one BL8 burst of a 64-bit rank) to
// special addresses CMD_BASE + 64*op. The layout of each command's data is
// this design's own choice; the set of commands follows the paper
// (PIM start, PIM off, select where, select distinct, entry, index and
// table update).
package jspim_pkg;

  localparam int unsigned KEY_W      = 32;
  localparam int unsigned VAL_W      = 32;
  localparam int unsigned CMD_DATA_W = 512;  // one 64-byte write burst
  localparam int unsigned ADDR_W     = 40;   // host physical address bits
  localparam int unsigned TU_MAX     = 7;    // entries carried by one table-update write

  typedef logic [KEY_W-1:0] key_t;
  typedef logic [VAL_W-1:0] val_t;

  // Command offsets from CMD_BASE, in units of one 64-byte line.
  typedef enum logic [3:0] {
    CMD_PIM_START       = 4'd0,
    CMD_PIM_OFF         = 4'd1,
    CMD_SELECT_WHERE    = 4'd2,
    CMD_SELECT_DISTINCT = 4'd3,
    CMD_ENTRY_UPDATE    = 4'd4,
    CMD_INDEX_UPDATE    = 4'd5,
    CMD_TABLE_UPDATE    = 4'd6
  } cmd_op_e;

  // Operations of the PIM chip's control logic.
  typedef enum logic [2:0] {
    PIM_SEARCH   = 3'd0,  // open row, compare tag in every slot, return match
    PIM_WR_SLOT  = 3'd1,  // open row, write one slot
    PIM_RD_SLOT  = 3'd2,  // open row, read one slot
    PIM_RD_COL   = 3'd3,  // memory mode: read one 64-bit column burst
    PIM_WR_COL   = 3'd4   // memory mode: write one 64-bit column burst
  } pim_op_e;

  // Kind of a record the RLU sends back to the host.
  typedef enum logic [1:0] {
    RES_JOIN     = 2'd0,  // answer to a probe key from the fact-table stream
    RES_SELECT   = 2'd1,  // answer to select where
    RES_DISTINCT = 2'd2,  // one unique key found by select distinct
    RES_UPDATE   = 2'd3   // acknowledge of an index update (hit = key found)
  } res_kind_e;

  typedef struct packed {
    res_kind_e kind;
    logic      hit;    // 0: null result, key not in the hash table
    logic      dup;    // value points into the duplication list
    key_t      key;
    val_t      value;
  } result_t;

  // One command request from the decoder to the PIM controller.
  typedef struct packed {
    cmd_op_e op;
    key_t    key;      // select where / index update
    val_t    value;    // index update / entry update
    logic    dup;      // index update / entry update
    logic    valid;    // entry update: 0 erases the slot
    logic [31:0] bucket;  // entry/table update, select distinct start
    logic [15:0] slot;    // entry/table update start slot
    logic [31:0] count;   // select distinct buckets / table update entries
    logic [TU_MAX-1:0][63:0] tu_data;  // table update entries {dup, tag[30:0], value}
  } cmd_req_t;

endpackage
