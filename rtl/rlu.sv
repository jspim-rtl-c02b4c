// rlu: the Rank-Level Unit of a JSPIM rank.
//
// The RLU sits on the LRDIMM next to the data buffers and turns a stream
// of fact-table keys into a stream of join results without the host
// touching the hash table. Its parts, in data-flow order:
//   rlu_cmd_decoder  host writes to special addresses: mode bit (PIM /
//                    plain DRAM) and query/update commands
//   rlu_key_buffer   bursts of keys read from the regular DRAM chips;
//                    back-pressure (stall) when full
//   rlu_opt_buffer   8-entry coalescing window; repeated keys are answered
//                    without a PIM search
//   rlu_pim_ctrl     hash computation (bucket = key index bits) and the
//                    PIM chip commands for every job
//   output buffer    OUT_DEPTH-deep FIFO of result records {kind, hit,
//                    dup, key, value} towards the host
// Key fetch from the DRAM chips, search in the PIM chip and return of
// results overlap: while one key is being searched, further key bursts
// are buffered and earlier results wait in the output buffer, which gives
// the four-stage overlap of key read, key transfer, bucket activation and
// match result. Key bursts are taken only in PIM mode. Join results and
// command results share the output buffer; command results have priority.
// Buffer depths are this design's choices.
module rlu
  import jspim_pkg::*;
#(
  parameter int unsigned NUM_BANKS      = 16,
  parameter int unsigned ROWS_PER_BANK  = 65536,
  parameter int unsigned ROW_BITS       = 8192,
  parameter int unsigned KEYS_PER_BURST = 16,
  parameter int unsigned KEY_BUF_DEPTH  = 4,
  parameter int unsigned WINDOW         = 8,
  parameter int unsigned OUT_DEPTH      = 8,
  parameter logic [ADDR_W-1:0] CMD_BASE = 40'hFF_FFFF_0000,
  parameter bit          RESET_PIM_MODE = 1'b1,
  // derived
  parameter int unsigned BUCKET_W       = $clog2(NUM_BANKS * ROWS_PER_BANK),
  parameter int unsigned TAG_W          = KEY_W - BUCKET_W,
  parameter int unsigned ENTRY_W        = TAG_W + VAL_W + 2,
  parameter int unsigned SLOTS          = ROW_BITS / ENTRY_W,
  parameter int unsigned SLOT_W         = $clog2(SLOTS),
  parameter int unsigned COL_W          = $clog2(ROW_BITS / 64),
  parameter int unsigned ROW_W          = $clog2(ROWS_PER_BANK),
  parameter int unsigned BANK_W         = $clog2(NUM_BANKS),
  parameter int unsigned NK_W           = $clog2(KEYS_PER_BURST + 1)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // host writes seen in the data buffers
  input  logic                                 wr_valid,
  output logic                                 wr_ready,
  input  logic [ADDR_W-1:0]                    wr_addr,
  input  logic [CMD_DATA_W-1:0]                wr_data,
  output logic                                 pim_mode,
  // key bursts from the regular DRAM chips
  input  logic                                 burst_valid,
  output logic                                 burst_ready,
  input  logic [KEYS_PER_BURST-1:0][KEY_W-1:0] burst_keys,
  input  logic [NK_W-1:0]                      burst_nkeys,
  // results towards the host
  output logic                                 res_valid,
  input  logic                                 res_ready,
  output result_t                              res,
  output logic                                 busy,
  // PIM chip
  output logic                                 chip_req_valid,
  input  logic                                 chip_req_ready,
  output pim_op_e                              chip_req_op,
  output logic [BANK_W-1:0]                    chip_req_bank,
  output logic [ROW_W-1:0]                     chip_req_row,
  output logic [SLOT_W-1:0]                    chip_req_slot,
  output logic [COL_W-1:0]                     chip_req_col,
  output logic [TAG_W-1:0]                     chip_req_tag,
  output logic [ENTRY_W-1:0]                   chip_req_entry,
  input  logic                                 chip_rsp_valid,
  input  logic                                 chip_rsp_hit,
  input  logic [SLOT_W-1:0]                    chip_rsp_slot,
  input  val_t                                 chip_rsp_value,
  input  logic                                 chip_rsp_dup,
  input  logic [ENTRY_W-1:0]                   chip_rsp_entry,
  // event counters
  output logic [31:0]                          stall_cycles,
  output logic [31:0]                          filtered_count,
  output logic [31:0]                          ignored_cmds
);
  // command decoder
  logic     cmd_valid, cmd_ready;
  cmd_req_t cmd;
  rlu_cmd_decoder #(.CMD_BASE(CMD_BASE), .RESET_PIM_MODE(RESET_PIM_MODE)) u_dec (
    .clk, .rst_n, .wr_valid, .wr_ready, .wr_addr, .wr_data, .pim_mode,
    .cmd_valid, .cmd_ready, .cmd, .ignored(ignored_cmds)
  );

  // key buffer: only fed in PIM mode
  logic kb_in_ready, k_valid, k_ready;
  key_t k_key;
  rlu_key_buffer #(.KEYS_PER_BURST(KEYS_PER_BURST), .DEPTH(KEY_BUF_DEPTH)) u_kbuf (
    .clk, .rst_n,
    .burst_valid (burst_valid && pim_mode),
    .burst_ready (kb_in_ready),
    .burst_keys, .burst_nkeys,
    .key_valid   (k_valid),
    .key_ready   (k_ready),
    .key         (k_key),
    .stall_cycles
  );
  assign burst_ready = kb_in_ready && pim_mode;

  // optimization window
  logic    pr_valid, pr_ready, pr_rsp_valid, pr_rsp_hit, pr_rsp_dup, upd;
  key_t    pr_key;
  val_t    pr_rsp_value;
  logic    j_valid, j_ready, opt_busy;
  result_t j_res;
  rlu_opt_buffer #(.WINDOW(WINDOW)) u_opt (
    .clk, .rst_n,
    .invalidate   (upd),
    .key_valid    (k_valid),
    .key_ready    (k_ready),
    .key          (k_key),
    .pr_valid, .pr_ready, .pr_key,
    .pr_rsp_valid, .pr_rsp_hit, .pr_rsp_dup, .pr_rsp_value,
    .res_valid    (j_valid),
    .res_ready    (j_ready),
    .res          (j_res),
    .filtered_count,
    .busy         (opt_busy)
  );

  // PIM controller
  logic    c_valid, c_ready, ctrl_busy;
  result_t c_res;
  rlu_pim_ctrl #(
    .NUM_BANKS(NUM_BANKS), .ROWS_PER_BANK(ROWS_PER_BANK), .ROW_BITS(ROW_BITS)
  ) u_ctrl (
    .clk, .rst_n,
    .pr_valid, .pr_ready, .pr_key,
    .pr_rsp_valid, .pr_rsp_hit, .pr_rsp_dup, .pr_rsp_value,
    .cmd_valid, .cmd_ready, .cmd,
    .res_valid (c_valid),
    .res_ready (c_ready),
    .res       (c_res),
    .upd,
    .busy      (ctrl_busy),
    .chip_req_valid, .chip_req_ready, .chip_req_op, .chip_req_bank, .chip_req_row,
    .chip_req_slot, .chip_req_col, .chip_req_tag, .chip_req_entry,
    .chip_rsp_valid, .chip_rsp_hit, .chip_rsp_slot, .chip_rsp_value, .chip_rsp_dup,
    .chip_rsp_entry
  );

  // output buffer with fixed priority for command results
  logic    o_valid, o_ready;
  result_t o_data;
  logic [$clog2(OUT_DEPTH+1)-1:0] o_count;
  assign o_valid = c_valid || j_valid;
  assign o_data  = c_valid ? c_res : j_res;
  assign c_ready = o_ready;
  assign j_ready = o_ready && !c_valid;

  sync_fifo #(.WIDTH($bits(result_t)), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk, .rst_n,
    .in_valid  (o_valid),
    .in_ready  (o_ready),
    .in_data   (o_data),
    .out_valid (res_valid),
    .out_ready (res_ready),
    .out_data  (res),
    .count     (o_count)
  );

  assign busy = ctrl_busy || cmd_valid || k_valid || j_valid || (o_count != '0) || opt_busy;
endmodule
