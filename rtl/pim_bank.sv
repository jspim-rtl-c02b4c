// pim_bank: one bank of the PIM chip.
//
// A bank is ROWS_PER_BANK rows (65536, the row count of the evaluated
// DDR4 device) split into subarrays of ROWS_PER_SA rows, each with its own
// row buffer, comparators and match select. The upper row-address bits
// pick the subarray, the lower bits the row inside it. Like an ordinary
// DRAM bank, at most one row is open: `act` opens a row (loads it into its
// subarray's row buffer), `pre` closes it. The bank keeps which subarray
// is open and routes the probe tag, slot/column accesses and their results
// to and from that subarray only; this output multiplexer plays the part of
// the column decoder that connects a subarray to the bank-level row buffer.
// Writes and results for a closed bank are ignored/undefined; the PIM chip
// never issues them. The split into 1024-row subarrays is this design's
// choice; the paper gives the subarray organisation but not its size.
module pim_bank #(
  parameter int unsigned ROWS_PER_BANK = 65536,
  parameter int unsigned ROWS_PER_SA   = 1024,
  parameter int unsigned ROW_BITS      = 8192,
  parameter int unsigned TAG_W         = 12,
  parameter int unsigned VAL_W         = 32,
  parameter int unsigned ENTRY_W       = TAG_W + VAL_W + 2,
  parameter int unsigned SLOTS         = ROW_BITS / ENTRY_W,
  parameter int unsigned SLOT_W        = $clog2(SLOTS),
  parameter int unsigned COL_W         = $clog2(ROW_BITS / 64),
  parameter int unsigned ROW_W         = $clog2(ROWS_PER_BANK)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               act,
  input  logic               pre,
  input  logic [ROW_W-1:0]   row,
  output logic               open_valid,
  output logic [ROW_W-1:0]   open_row,
  input  logic [TAG_W-1:0]   probe_tag,
  output logic               m_hit,
  output logic [SLOT_W-1:0]  m_slot,
  output logic [VAL_W-1:0]   m_value,
  output logic               m_dup,
  input  logic               wr_slot_en,
  input  logic [SLOT_W-1:0]  slot_addr,
  input  logic [ENTRY_W-1:0] wr_entry,
  output logic [ENTRY_W-1:0] rd_entry,
  input  logic               wr_col_en,
  input  logic [COL_W-1:0]   col_addr,
  input  logic [63:0]        wr_col_data,
  output logic [63:0]        rd_col_data
);
  /*verilator no_inline_module*/
  localparam int unsigned NUM_SA = ROWS_PER_BANK / ROWS_PER_SA;
  localparam int unsigned LROW_W = $clog2(ROWS_PER_SA);
  localparam int unsigned SA_W   = (NUM_SA > 1) ? $clog2(NUM_SA) : 1;

  logic [SA_W-1:0] act_sa, open_sa;
  if (NUM_SA > 1) begin : g_sa_idx
    assign act_sa = row[ROW_W-1:LROW_W];
  end else begin : g_sa_one
    assign act_sa = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_valid <= 1'b0;
      open_row   <= '0;
    end else if (act) begin
      open_valid <= 1'b1;
      open_row   <= row;
    end else if (pre) begin
      open_valid <= 1'b0;
    end
  end
  assign open_sa = (NUM_SA > 1) ? open_row[ROW_W-1 -: SA_W] : '0;

  logic [NUM_SA-1:0]              sa_hit, sa_dup;
  logic [NUM_SA-1:0][SLOT_W-1:0]  sa_slot;
  logic [NUM_SA-1:0][VAL_W-1:0]   sa_value;
  logic [NUM_SA-1:0][ENTRY_W-1:0] sa_entry;
  logic [NUM_SA-1:0][63:0]        sa_col;

  for (genvar i = 0; i < NUM_SA; i++) begin : g_sa
    logic sel_open;
    assign sel_open = open_valid && (open_sa == SA_W'(i));
    pim_subarray #(
      .ROWS(ROWS_PER_SA), .ROW_BITS(ROW_BITS), .TAG_W(TAG_W), .VAL_W(VAL_W),
      .ENTRY_W(ENTRY_W), .SLOTS(SLOTS), .SLOT_W(SLOT_W), .COL_W(COL_W)
    ) u_sa (
      .clk         (clk),
      .act         (act && (act_sa == SA_W'(i))),
      .act_row     (row[LROW_W-1:0]),
      .probe_tag   (probe_tag),
      .m_hit       (sa_hit[i]),
      .m_slot      (sa_slot[i]),
      .m_value     (sa_value[i]),
      .m_dup       (sa_dup[i]),
      .wr_slot_en  (wr_slot_en && sel_open),
      .slot_addr   (slot_addr),
      .wr_entry    (wr_entry),
      .rd_entry    (sa_entry[i]),
      .wr_col_en   (wr_col_en && sel_open),
      .col_addr    (col_addr),
      .wr_col_data (wr_col_data),
      .rd_col_data (sa_col[i])
    );
  end

  // Column decoder towards the bank-level row buffer.
  always_comb begin
    m_hit       = sa_hit[open_sa];
    m_slot      = sa_slot[open_sa];
    m_value     = sa_value[open_sa];
    m_dup       = sa_dup[open_sa];
    rd_entry    = sa_entry[open_sa];
    rd_col_data = sa_col[open_sa];
  end
endmodule
