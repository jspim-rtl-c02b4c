// jspim_rank: one JSPIM rank (top level).
//
// A JSPIM rank is an LRDIMM rank in which one chip is PIM-enabled (it has
// comparators and a match select behind every subarray row buffer) and a
// Rank-Level Unit (RLU) sits next to the data buffers. The regular DRAM
// chips of the rank hold the dictionary-encoded fact-table key column; the
// PIM chip holds the hash table, one bucket per row. The host streams read
// requests over the key column; the regular chips answer with key bursts,
// which the RLU takes from the data buffers, hashes to a bucket (row) and
// searches in the PIM chip in place, returning (key, value) records.
//
// This module holds the RLU and the PIM chip. The regular DRAM chips, data
// buffers, RCD and host are outside: their traffic appears as ports.
//   wr_*     host writes seen by the RLU (special-address commands)
//   burst_*  key bursts coming back from the regular DRAM chips
//   res_*    result records for the host (valid/ready)
//   mem_*    ordinary column access to the PIM chip in memory mode
// Mode: in PIM mode the RLU owns the PIM chip and mem_req_ready stays low.
// After PIM_OFF, once the RLU has drained, the PIM chip behaves as a plain
// DRAM chip on the mem_* port (64-bit column bursts). A memory-mode access
// in flight finishes before the RLU may use the chip again.
// The counters are for observation: row activations and searches in the PIM
// chip, cycles a key burst was refused (stall), keys answered by the
// optimization window, commands dropped in memory mode.
module jspim_rank
  import jspim_pkg::*;
#(
  parameter int unsigned NUM_BANKS      = 16,
  parameter int unsigned ROWS_PER_BANK  = 65536,
  parameter int unsigned ROWS_PER_SA    = 1024,
  parameter int unsigned ROW_BITS       = 8192,
  parameter int unsigned T_RP           = 22,
  parameter int unsigned T_RCD          = 22,
  parameter int unsigned T_CL           = 22,
  parameter int unsigned T_CMP          = 0,
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
  input  logic                                 wr_valid,
  output logic                                 wr_ready,
  input  logic [ADDR_W-1:0]                    wr_addr,
  input  logic [CMD_DATA_W-1:0]                wr_data,
  input  logic                                 burst_valid,
  output logic                                 burst_ready,
  input  logic [KEYS_PER_BURST-1:0][KEY_W-1:0] burst_keys,
  input  logic [NK_W-1:0]                      burst_nkeys,
  output logic                                 res_valid,
  input  logic                                 res_ready,
  output result_t                              res,
  input  logic                                 mem_req_valid,
  output logic                                 mem_req_ready,
  input  logic                                 mem_we,
  input  logic [BANK_W-1:0]                    mem_bank,
  input  logic [ROW_W-1:0]                     mem_row,
  input  logic [COL_W-1:0]                     mem_col,
  input  logic [63:0]                          mem_wdata,
  output logic                                 mem_rsp_valid,
  output logic [63:0]                          mem_rdata,
  output logic                                 pim_mode,
  output logic                                 busy,
  output logic [31:0]                          act_count,
  output logic [31:0]                          search_count,
  output logic [31:0]                          stall_cycles,
  output logic [31:0]                          filtered_count,
  output logic [31:0]                          ignored_cmds
);
  // RLU side of the chip port
  logic               r_req_valid, r_req_ready;
  pim_op_e            r_req_op;
  logic [BANK_W-1:0]  r_req_bank;
  logic [ROW_W-1:0]   r_req_row;
  logic [SLOT_W-1:0]  r_req_slot;
  logic [COL_W-1:0]   r_req_col;
  logic [TAG_W-1:0]   r_req_tag;
  logic [ENTRY_W-1:0] r_req_entry;

  // chip port
  logic               c_req_valid, c_req_ready;
  pim_op_e            c_req_op;
  logic [BANK_W-1:0]  c_req_bank;
  logic [ROW_W-1:0]   c_req_row;
  logic [SLOT_W-1:0]  c_req_slot;
  logic [COL_W-1:0]   c_req_col;
  logic               c_rsp_valid, c_rsp_hit, c_rsp_dup;
  logic [SLOT_W-1:0]  c_rsp_slot;
  val_t               c_rsp_value;
  logic [ENTRY_W-1:0] c_rsp_entry;
  logic [63:0]        c_rsp_rdata;

  logic rlu_busy, host_pending, host_sel;

  rlu #(
    .NUM_BANKS(NUM_BANKS), .ROWS_PER_BANK(ROWS_PER_BANK), .ROW_BITS(ROW_BITS),
    .KEYS_PER_BURST(KEYS_PER_BURST), .KEY_BUF_DEPTH(KEY_BUF_DEPTH), .WINDOW(WINDOW),
    .OUT_DEPTH(OUT_DEPTH), .CMD_BASE(CMD_BASE), .RESET_PIM_MODE(RESET_PIM_MODE)
  ) u_rlu (
    .clk, .rst_n,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .pim_mode,
    .burst_valid, .burst_ready, .burst_keys, .burst_nkeys,
    .res_valid, .res_ready, .res,
    .busy            (rlu_busy),
    .chip_req_valid  (r_req_valid),
    .chip_req_ready  (r_req_ready),
    .chip_req_op     (r_req_op),
    .chip_req_bank   (r_req_bank),
    .chip_req_row    (r_req_row),
    .chip_req_slot   (r_req_slot),
    .chip_req_col    (r_req_col),
    .chip_req_tag    (r_req_tag),
    .chip_req_entry  (r_req_entry),
    .chip_rsp_valid  (c_rsp_valid && !host_pending),
    .chip_rsp_hit    (c_rsp_hit),
    .chip_rsp_slot   (c_rsp_slot),
    .chip_rsp_value  (c_rsp_value),
    .chip_rsp_dup    (c_rsp_dup),
    .chip_rsp_entry  (c_rsp_entry),
    .stall_cycles, .filtered_count, .ignored_cmds
  );

  // Chip ownership: the host only in memory mode with the RLU drained.
  assign host_sel      = !pim_mode && !rlu_busy && !r_req_valid;
  assign mem_req_ready = host_sel && !host_pending && c_req_ready;
  assign r_req_ready   = !host_sel && !host_pending && c_req_ready;

  assign c_req_valid = host_sel ? (mem_req_valid && !host_pending) : (r_req_valid && !host_pending);
  assign c_req_op    = host_sel ? (mem_we ? PIM_WR_COL : PIM_RD_COL) : r_req_op;
  assign c_req_bank  = host_sel ? mem_bank : r_req_bank;
  assign c_req_row   = host_sel ? mem_row  : r_req_row;
  assign c_req_slot  = r_req_slot;
  assign c_req_col   = host_sel ? mem_col  : r_req_col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          host_pending <= 1'b0;
    else if (mem_req_valid && mem_req_ready) host_pending <= 1'b1;
    else if (c_rsp_valid)                host_pending <= 1'b0;
  end

  assign mem_rsp_valid = c_rsp_valid && host_pending;
  assign mem_rdata     = c_rsp_rdata;
  assign busy          = rlu_busy || host_pending;

  pim_chip #(
    .NUM_BANKS(NUM_BANKS), .ROWS_PER_BANK(ROWS_PER_BANK), .ROWS_PER_SA(ROWS_PER_SA),
    .ROW_BITS(ROW_BITS), .TAG_W(TAG_W), .T_RP(T_RP), .T_RCD(T_RCD), .T_CL(T_CL),
    .T_CMP(T_CMP)
  ) u_chip (
    .clk, .rst_n,
    .req_valid    (c_req_valid),
    .req_ready    (c_req_ready),
    .req_op       (c_req_op),
    .req_bank     (c_req_bank),
    .req_row      (c_req_row),
    .req_slot     (c_req_slot),
    .req_col      (c_req_col),
    .req_tag      (r_req_tag),
    .req_entry    (r_req_entry),
    .req_wdata    (mem_wdata),
    .rsp_valid    (c_rsp_valid),
    .rsp_hit      (c_rsp_hit),
    .rsp_slot     (c_rsp_slot),
    .rsp_value    (c_rsp_value),
    .rsp_dup      (c_rsp_dup),
    .rsp_entry    (c_rsp_entry),
    .rsp_rdata    (c_rsp_rdata),
    .act_count,
    .search_count
  );
endmodule
