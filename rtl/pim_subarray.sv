// pim_subarray: one DRAM subarray of the PIM chip with its search engine.
//
// Each row of the subarray holds one hash bucket. A row is a flat vector of
// ROW_BITS cells (1024 columns of a x8 device = 1 KiB, the subarray row
// buffer size the paper quotes) cut into SLOTS = ROW_BITS / ENTRY_W slots;
// each slot is {valid, dup, tag, value}, slot i at bits
// [i*ENTRY_W +: ENTRY_W]; the few bits left at the top of the row are unused.
// `act` copies a row into the subarray row buffer (activation). Behind the
// row buffer sits one key_comparator per slot, all fed with the same probe
// tag, and a match_select that turns their outputs into (hit, slot, value,
// dup). The search result is therefore a combinational function of the row
// buffer and the probe tag; the PIM chip times and registers it.
//
// Writes (one slot, or one 64-bit column burst in memory mode) go into the
// open row: both the row buffer and the cell row are updated in the same
// cycle, which stands in for the restore done at precharge. Reads of a slot
// or a 64-bit column come combinationally from the row buffer.
//
// The cell array is a plain memory array: the DRAM cells, sense amplifiers
// and their analogue timing are not modelled, only their contents. The
// comparators and match select are the paper's; slot layout, valid bit and
// the write-through are this design's choices. Rows per subarray (1024) is
// not given by the paper.
module pim_subarray #(
  parameter int unsigned ROWS     = 1024,
  parameter int unsigned ROW_BITS = 8192,
  parameter int unsigned TAG_W    = 12,
  parameter int unsigned VAL_W    = 32,
  parameter int unsigned ENTRY_W  = TAG_W + VAL_W + 2,
  parameter int unsigned SLOTS    = ROW_BITS / ENTRY_W,
  parameter int unsigned SLOT_W   = $clog2(SLOTS),
  parameter int unsigned NCOL     = ROW_BITS / 64,
  parameter int unsigned COL_W    = $clog2(NCOL),
  parameter int unsigned LROW_W   = $clog2(ROWS)
) (
  input  logic               clk,
  // activation
  input  logic               act,
  input  logic [LROW_W-1:0]  act_row,
  // search on the open row
  input  logic [TAG_W-1:0]   probe_tag,
  output logic               m_hit,
  output logic [SLOT_W-1:0]  m_slot,
  output logic [VAL_W-1:0]   m_value,
  output logic               m_dup,
  // slot access on the open row
  input  logic               wr_slot_en,
  input  logic [SLOT_W-1:0]  slot_addr,
  input  logic [ENTRY_W-1:0] wr_entry,
  output logic [ENTRY_W-1:0] rd_entry,
  // 64-bit column access on the open row (memory mode)
  input  logic               wr_col_en,
  input  logic [COL_W-1:0]   col_addr,
  input  logic [63:0]        wr_col_data,
  output logic [63:0]        rd_col_data
);
  /*verilator no_inline_module*/
  logic [ROW_BITS-1:0] cells [ROWS];
  logic [ROW_BITS-1:0] row_buf;
  logic [LROW_W-1:0]   open_row;

  always_ff @(posedge clk) begin
    if (act) begin
      row_buf  <= cells[act_row];
      open_row <= act_row;
    end else if (wr_slot_en) begin
      row_buf[slot_addr*ENTRY_W +: ENTRY_W]         <= wr_entry;
      cells[open_row][slot_addr*ENTRY_W +: ENTRY_W] <= wr_entry;
    end else if (wr_col_en) begin
      row_buf[col_addr*64 +: 64]         <= wr_col_data;
      cells[open_row][col_addr*64 +: 64] <= wr_col_data;
    end
  end

  // Comparators, one per slot.
  logic [SLOTS-1:0]            match_vec;
  logic [SLOTS-1:0][VAL_W-1:0] values;
  logic [SLOTS-1:0]            dups;

  for (genvar s = 0; s < SLOTS; s++) begin : g_slot
    assign values[s] = row_buf[s*ENTRY_W +: VAL_W];
    assign dups[s]   = row_buf[s*ENTRY_W + ENTRY_W - 2];
    key_comparator #(.TAG_W(TAG_W)) u_cmp (
      .slot_valid (row_buf[s*ENTRY_W + ENTRY_W - 1]),
      .slot_tag   (row_buf[s*ENTRY_W + VAL_W +: TAG_W]),
      .probe_tag  (probe_tag),
      .match      (match_vec[s])
    );
  end

  match_select #(.SLOTS(SLOTS), .VAL_W(VAL_W), .SLOT_W(SLOT_W)) u_msel (
    .match_vec (match_vec),
    .values    (values),
    .dups      (dups),
    .hit       (m_hit),
    .slot      (m_slot),
    .value     (m_value),
    .dup       (m_dup)
  );

  assign rd_entry    = row_buf[slot_addr*ENTRY_W +: ENTRY_W];
  assign rd_col_data = row_buf[col_addr*64 +: 64];
endmodule
