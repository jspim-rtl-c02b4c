// pim_chip: the PIM-enabled DRAM chip of a rank.
//
// NUM_BANKS banks of pim_bank plus the chip's control logic. The chip takes
// one operation at a time on a valid/ready request port and answers every
// operation with one pulse on rsp_valid:
//
//   PIM_SEARCH  open (bank,row), broadcast `tag` to the comparators of the
//               row buffer, return hit/slot/value/dup (null when no match)
//   PIM_WR_SLOT open (bank,row), write `entry` into slot `slot`
//   PIM_RD_SLOT open (bank,row), return the entry in slot `slot`
//   PIM_RD_COL  open (bank,row), return 64-bit column burst `col`
//   PIM_WR_COL  open (bank,row), write 64-bit column burst `col`
//
// Timing (in chip clock cycles): if the bank has another row open it is
// precharged first (T_RP), then the row is activated (T_RCD). A request to
// the row that is already open skips both: this is the row-buffer hit that
// makes repeated fact keys cheap. A search then takes one cycle for the
// comparators and match select, whose result is registered, plus T_CMP
// extra cycles (the subarray delay the paper sweeps from 0 to 4; 0 is its
// base case). Reads take T_CL after the row is open; writes are
// acknowledged one cycle after they are applied. Rows stay open after an
// access (open-page policy). T_RP, T_RCD and T_CL default to DDR4-3200
// 22-22-22 values; the paper only names the DDR4-3200 device. Bank count,
// the single-operation-at-a-time control and the open-page policy are this
// design's choices.
//
// The counters count activations and searches since reset.
module pim_chip
  import jspim_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 16,
  parameter int unsigned ROWS_PER_BANK = 65536,
  parameter int unsigned ROWS_PER_SA   = 1024,
  parameter int unsigned ROW_BITS      = 8192,
  parameter int unsigned TAG_W         = KEY_W - $clog2(NUM_BANKS * ROWS_PER_BANK),
  parameter int unsigned T_RP          = 22,
  parameter int unsigned T_RCD         = 22,
  parameter int unsigned T_CL          = 22,
  parameter int unsigned T_CMP         = 0,
  // derived
  parameter int unsigned ENTRY_W       = TAG_W + VAL_W + 2,
  parameter int unsigned SLOTS         = ROW_BITS / ENTRY_W,
  parameter int unsigned SLOT_W        = $clog2(SLOTS),
  parameter int unsigned COL_W         = $clog2(ROW_BITS / 64),
  parameter int unsigned ROW_W         = $clog2(ROWS_PER_BANK),
  parameter int unsigned BANK_W        = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  pim_op_e            req_op,
  input  logic [BANK_W-1:0]  req_bank,
  input  logic [ROW_W-1:0]   req_row,
  input  logic [SLOT_W-1:0]  req_slot,
  input  logic [COL_W-1:0]   req_col,
  input  logic [TAG_W-1:0]   req_tag,
  input  logic [ENTRY_W-1:0] req_entry,
  input  logic [63:0]        req_wdata,
  output logic               rsp_valid,
  output logic               rsp_hit,
  output logic [SLOT_W-1:0]  rsp_slot,
  output logic [VAL_W-1:0]   rsp_value,
  output logic               rsp_dup,
  output logic [ENTRY_W-1:0] rsp_entry,
  output logic [63:0]        rsp_rdata,
  output logic [31:0]        act_count,
  output logic [31:0]        search_count
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_ACT, S_RCD, S_ACCESS, S_DELAY} state_e;
  state_e state;

  logic [7:0]         cnt;
  pim_op_e            op_q;
  logic [BANK_W-1:0]  bank_q;
  logic [ROW_W-1:0]   row_q;
  logic [SLOT_W-1:0]  slot_q;
  logic [COL_W-1:0]   col_q;
  logic [TAG_W-1:0]   tag_q;
  logic [ENTRY_W-1:0] entry_q;
  logic [63:0]        wdata_q;

  // Per-bank signals.
  logic [NUM_BANKS-1:0]              b_open;
  logic [NUM_BANKS-1:0][ROW_W-1:0]   b_open_row;
  logic [NUM_BANKS-1:0]              b_hit, b_dup;
  logic [NUM_BANKS-1:0][SLOT_W-1:0]  b_slot;
  logic [NUM_BANKS-1:0][VAL_W-1:0]   b_value;
  logic [NUM_BANKS-1:0][ENTRY_W-1:0] b_entry;
  logic [NUM_BANKS-1:0][63:0]        b_col;

  logic do_act, do_pre, do_wr_slot, do_wr_col;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic sel;
    assign sel = (bank_q == BANK_W'(b));
    pim_bank #(
      .ROWS_PER_BANK(ROWS_PER_BANK), .ROWS_PER_SA(ROWS_PER_SA), .ROW_BITS(ROW_BITS),
      .TAG_W(TAG_W), .VAL_W(VAL_W), .ENTRY_W(ENTRY_W), .SLOTS(SLOTS),
      .SLOT_W(SLOT_W), .COL_W(COL_W), .ROW_W(ROW_W)
    ) u_bank (
      .clk         (clk),
      .rst_n       (rst_n),
      .act         (do_act && sel),
      .pre         (do_pre && sel),
      .row         (row_q),
      .open_valid  (b_open[b]),
      .open_row    (b_open_row[b]),
      .probe_tag   (tag_q),
      .m_hit       (b_hit[b]),
      .m_slot      (b_slot[b]),
      .m_value     (b_value[b]),
      .m_dup       (b_dup[b]),
      .wr_slot_en  (do_wr_slot && sel),
      .slot_addr   (slot_q),
      .wr_entry    (entry_q),
      .rd_entry    (b_entry[b]),
      .wr_col_en   (do_wr_col && sel),
      .col_addr    (col_q),
      .wr_col_data (wdata_q),
      .rd_col_data (b_col[b])
    );
  end

  assign req_ready  = (state == S_IDLE);
  assign do_pre     = (state == S_PRE)    && (cnt == 8'd0);
  assign do_act     = (state == S_ACT);
  assign do_wr_slot = (state == S_ACCESS) && (op_q == PIM_WR_SLOT);
  assign do_wr_col  = (state == S_ACCESS) && (op_q == PIM_WR_COL);

  logic row_open_hit, bank_busy_other;
  assign row_open_hit    = b_open[req_bank] && (b_open_row[req_bank] == req_row);
  assign bank_busy_other = b_open[req_bank] && (b_open_row[req_bank] != req_row);

  // Cycles from the start of S_ACCESS to the response, minus one.
  function automatic int unsigned post_delay(pim_op_e op);
    unique case (op)
      PIM_SEARCH:              return T_CMP;
      PIM_RD_SLOT, PIM_RD_COL: return (T_CL > 0) ? T_CL - 1 : 0;
      default:                 return 0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cnt          <= '0;
      op_q         <= PIM_SEARCH;
      bank_q       <= '0;
      row_q        <= '0;
      slot_q       <= '0;
      col_q        <= '0;
      tag_q        <= '0;
      entry_q      <= '0;
      wdata_q      <= '0;
      rsp_valid    <= 1'b0;
      rsp_hit      <= 1'b0;
      rsp_slot     <= '0;
      rsp_value    <= '0;
      rsp_dup      <= 1'b0;
      rsp_entry    <= '0;
      rsp_rdata    <= '0;
      act_count    <= '0;
      search_count <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          op_q    <= req_op;
          bank_q  <= req_bank;
          row_q   <= req_row;
          slot_q  <= req_slot;
          col_q   <= req_col;
          tag_q   <= req_tag;
          entry_q <= req_entry;
          wdata_q <= req_wdata;
          if (row_open_hit) begin
            state <= S_ACCESS;
          end else if (bank_busy_other) begin
            state <= S_PRE;
            cnt   <= 8'((T_RP > 0) ? T_RP - 1 : 0);
          end else begin
            state <= S_ACT;
          end
        end
        // the bank is precharged at the end of T_RP
        S_PRE: begin
          if (cnt == 8'd0) state <= S_ACT;
          else             cnt   <= cnt - 8'd1;
        end
        // activate: the row is in the row buffer T_RCD cycles later
        S_ACT: begin
          act_count <= act_count + 32'd1;
          if (T_RCD <= 1) begin
            state <= S_ACCESS;
          end else begin
            state <= S_RCD;
            cnt   <= 8'(T_RCD - 2);
          end
        end
        S_RCD: begin
          if (cnt == 8'd0) state <= S_ACCESS;
          else             cnt   <= cnt - 8'd1;
        end
        // comparators and match select act on the open row buffer
        S_ACCESS: begin
          rsp_hit   <= b_hit[bank_q];
          rsp_slot  <= b_slot[bank_q];
          rsp_value <= b_value[bank_q];
          rsp_dup   <= b_dup[bank_q];
          rsp_entry <= b_entry[bank_q];
          rsp_rdata <= b_col[bank_q];
          if (op_q == PIM_SEARCH) search_count <= search_count + 32'd1;
          if (post_delay(op_q) == 0) begin
            rsp_valid <= 1'b1;
            state     <= S_IDLE;
          end else begin
            cnt   <= 8'(post_delay(op_q) - 1);
            state <= S_DELAY;
          end
        end
        S_DELAY: begin
          if (cnt == 8'd0) begin
            rsp_valid <= 1'b1;
            state     <= S_IDLE;
          end else begin
            cnt <= cnt - 8'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
