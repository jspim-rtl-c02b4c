// rlu_pim_ctrl: hash computation and PIM-chip sequencing inside the RLU.
//
// Hash computation. The encoded key is split into two fields: its low
// BUCKET_W bits are index bits that name the bucket, i.e. the one PIM row
// that can hold the key, and the remaining TAG_W upper bits are the bits
// stored in the row and compared by the subarray comparators. With
// NUM_BANKS banks of ROWS_PER_BANK rows there are NUM_BANKS*ROWS_PER_BANK
// buckets; the low bucket bits select the bank and the rest the row, so
// consecutive buckets fall into different banks. Using the index bits
// directly as the bucket number is the simplest hash that fits the paper's
// "split the key bits into index bits and stored bits"; spreading skewed
// keys over buckets is left to the host's dictionary encoding, as in the
// paper.
//
// Sequencing. One job at a time; host commands take priority over probe
// keys. Each job issues PIM chip operations and waits for their responses:
//   probe key       SEARCH -> answer on pr_rsp_* (to the optimization buffer)
//   select where    SEARCH -> RES_SELECT record
//   index update    SEARCH, then on a hit WR_SLOT with the new value and
//                   dup flag -> RES_UPDATE record (hit = key was present)
//   entry update    WR_SLOT of {valid, dup, tag(key), value} at bucket/slot
//   table update    WR_SLOT of up to 7 entries into consecutive slots of one
//                   bucket starting at `slot` (entries past the last slot of
//                   the row are dropped)
//   select distinct RD_SLOT over every slot of `count` buckets from
//                   `bucket`; each valid slot gives a RES_DISTINCT record
//                   whose key is rebuilt as {tag, bucket}
// `upd` pulses after every completed slot write so that the optimization
// window can be emptied. The record formats and the command fields are this
// design's choices; the set of operations is the paper's.
module rlu_pim_ctrl
  import jspim_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 16,
  parameter int unsigned ROWS_PER_BANK = 65536,
  parameter int unsigned ROW_BITS      = 8192,
  // derived
  parameter int unsigned BUCKET_W      = $clog2(NUM_BANKS * ROWS_PER_BANK),
  parameter int unsigned TAG_W         = KEY_W - BUCKET_W,
  parameter int unsigned ENTRY_W       = TAG_W + VAL_W + 2,
  parameter int unsigned SLOTS         = ROW_BITS / ENTRY_W,
  parameter int unsigned SLOT_W        = $clog2(SLOTS),
  parameter int unsigned COL_W         = $clog2(ROW_BITS / 64),
  parameter int unsigned ROW_W         = $clog2(ROWS_PER_BANK),
  parameter int unsigned BANK_W        = $clog2(NUM_BANKS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // probe keys
  input  logic               pr_valid,
  output logic               pr_ready,
  input  key_t               pr_key,
  output logic               pr_rsp_valid,
  output logic               pr_rsp_hit,
  output logic               pr_rsp_dup,
  output val_t               pr_rsp_value,
  // host commands
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_req_t           cmd,
  // command results
  output logic               res_valid,
  input  logic               res_ready,
  output result_t            res,
  output logic               upd,
  output logic               busy,
  // PIM chip
  output logic               chip_req_valid,
  input  logic               chip_req_ready,
  output pim_op_e            chip_req_op,
  output logic [BANK_W-1:0]  chip_req_bank,
  output logic [ROW_W-1:0]   chip_req_row,
  output logic [SLOT_W-1:0]  chip_req_slot,
  output logic [COL_W-1:0]   chip_req_col,
  output logic [TAG_W-1:0]   chip_req_tag,
  output logic [ENTRY_W-1:0] chip_req_entry,
  input  logic               chip_rsp_valid,
  input  logic               chip_rsp_hit,
  input  logic [SLOT_W-1:0]  chip_rsp_slot,
  input  val_t               chip_rsp_value,
  input  logic               chip_rsp_dup,
  input  logic [ENTRY_W-1:0] chip_rsp_entry
);
  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_NEXT, S_OUT} state_e;
  state_e state;

  logic                is_probe;
  cmd_req_t            c;
  pim_op_e             op_q;
  logic [BUCKET_W-1:0] bucket_q;
  logic [SLOT_W-1:0]   slot_q;
  logic [TAG_W-1:0]    tag_q;
  logic [ENTRY_W-1:0]  entry_q;
  logic [31:0]         left_q;    // buckets (distinct) or entries (table update) left
  logic [2:0]          tu_i;
  logic                phase2;    // index update: write phase

  function automatic logic [BUCKET_W-1:0] bucket_of(key_t k);
    return k[BUCKET_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(key_t k);
    return k[KEY_W-1 -: TAG_W];
  endfunction
  function automatic logic [ENTRY_W-1:0] mk_entry(logic v, logic d, logic [TAG_W-1:0] t, val_t x);
    return {v, d, t, x};
  endfunction
  function automatic logic [ENTRY_W-1:0] tu_entry(logic [63:0] w);
    return mk_entry(1'b1, w[63], w[32 +: TAG_W], w[31:0]);
  endfunction

  assign chip_req_valid = (state == S_ISSUE);
  assign chip_req_op    = op_q;
  assign chip_req_bank  = bucket_q[BANK_W-1:0];
  assign chip_req_row   = bucket_q[BUCKET_W-1:BANK_W];
  assign chip_req_slot  = slot_q;
  assign chip_req_col   = '0;
  assign chip_req_tag   = tag_q;
  assign chip_req_entry = entry_q;

  assign cmd_ready = (state == S_IDLE);
  assign pr_ready  = (state == S_IDLE) && !cmd_valid;
  assign res_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);

  logic last_slot;
  assign last_slot = (slot_q == SLOT_W'(SLOTS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      is_probe     <= 1'b0;
      c            <= '0;
      op_q         <= PIM_SEARCH;
      bucket_q     <= '0;
      slot_q       <= '0;
      tag_q        <= '0;
      entry_q      <= '0;
      left_q       <= '0;
      tu_i         <= '0;
      phase2       <= 1'b0;
      res          <= '0;
      upd          <= 1'b0;
      pr_rsp_valid <= 1'b0;
      pr_rsp_hit   <= 1'b0;
      pr_rsp_dup   <= 1'b0;
      pr_rsp_value <= '0;
    end else begin
      upd          <= 1'b0;
      pr_rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          phase2 <= 1'b0;
          tu_i   <= '0;
          if (cmd_valid) begin
            is_probe <= 1'b0;
            c        <= cmd;
            tag_q    <= tag_of(cmd.key);
            unique case (cmd.op)
              CMD_SELECT_WHERE, CMD_INDEX_UPDATE: begin
                op_q     <= PIM_SEARCH;
                bucket_q <= bucket_of(cmd.key);
                state    <= S_ISSUE;
              end
              CMD_ENTRY_UPDATE: begin
                op_q     <= PIM_WR_SLOT;
                bucket_q <= cmd.bucket[BUCKET_W-1:0];
                slot_q   <= cmd.slot[SLOT_W-1:0];
                entry_q  <= mk_entry(cmd.valid, cmd.dup, tag_of(cmd.key), cmd.value);
                state    <= (32'(cmd.slot) < SLOTS) ? S_ISSUE : S_IDLE;
              end
              CMD_TABLE_UPDATE: begin
                op_q     <= PIM_WR_SLOT;
                bucket_q <= cmd.bucket[BUCKET_W-1:0];
                slot_q   <= cmd.slot[SLOT_W-1:0];
                entry_q  <= tu_entry(cmd.tu_data[0]);
                left_q   <= cmd.count;
                state    <= (cmd.count != 0 && 32'(cmd.slot) < SLOTS) ? S_ISSUE : S_IDLE;
              end
              CMD_SELECT_DISTINCT: begin
                op_q     <= PIM_RD_SLOT;
                bucket_q <= cmd.bucket[BUCKET_W-1:0];
                slot_q   <= '0;
                left_q   <= cmd.count;
                state    <= (cmd.count != 0) ? S_ISSUE : S_IDLE;
              end
              default: state <= S_IDLE;
            endcase
          end else if (pr_valid) begin
            is_probe <= 1'b1;
            op_q     <= PIM_SEARCH;
            bucket_q <= bucket_of(pr_key);
            tag_q    <= tag_of(pr_key);
            c.key    <= pr_key;
            state    <= S_ISSUE;
          end
        end
        S_ISSUE: if (chip_req_ready) state <= S_WAIT;
        S_WAIT: if (chip_rsp_valid) begin
          if (op_q == PIM_WR_SLOT) upd <= 1'b1;
          if (is_probe) begin
            pr_rsp_valid <= 1'b1;
            pr_rsp_hit   <= chip_rsp_hit;
            pr_rsp_dup   <= chip_rsp_dup;
            pr_rsp_value <= chip_rsp_value;
            state        <= S_IDLE;
          end else begin
            unique case (c.op)
              CMD_SELECT_WHERE: begin
                res   <= '{kind: RES_SELECT, hit: chip_rsp_hit, dup: chip_rsp_dup,
                           key: c.key, value: chip_rsp_value};
                state <= S_OUT;
              end
              CMD_INDEX_UPDATE: begin
                if (!phase2 && chip_rsp_hit) begin
                  phase2  <= 1'b1;
                  op_q    <= PIM_WR_SLOT;
                  slot_q  <= chip_rsp_slot;
                  entry_q <= mk_entry(1'b1, c.dup, tag_q, c.value);
                  state   <= S_ISSUE;
                end else begin
                  res   <= '{kind: RES_UPDATE, hit: phase2, dup: c.dup,
                             key: c.key, value: c.value};
                  state <= S_OUT;
                end
              end
              CMD_TABLE_UPDATE: state <= S_NEXT;
              CMD_SELECT_DISTINCT: begin
                if (chip_rsp_entry[ENTRY_W-1]) begin
                  res   <= '{kind: RES_DISTINCT, hit: 1'b1, dup: chip_rsp_entry[ENTRY_W-2],
                             key: {chip_rsp_entry[VAL_W +: TAG_W], bucket_q},
                             value: chip_rsp_entry[VAL_W-1:0]};
                  state <= S_OUT;
                end else begin
                  state <= S_NEXT;
                end
              end
              default: state <= S_IDLE;  // entry update
            endcase
          end
        end
        S_OUT: if (res_ready) state <= (c.op == CMD_SELECT_DISTINCT) ? S_NEXT : S_IDLE;
        // advance multi-operation commands
        S_NEXT: begin
          if (c.op == CMD_TABLE_UPDATE) begin
            if (left_q <= 32'd1 || last_slot || 32'(tu_i) + 1 >= TU_MAX) begin
              state <= S_IDLE;
            end else begin
              left_q  <= left_q - 32'd1;
              tu_i    <= tu_i + 3'd1;
              slot_q  <= slot_q + 1'b1;
              entry_q <= tu_entry(c.tu_data[tu_i + 3'd1]);
              state   <= S_ISSUE;
            end
          end else begin  // select distinct
            if (!last_slot) begin
              slot_q <= slot_q + 1'b1;
              state  <= S_ISSUE;
            end else if (left_q <= 32'd1) begin
              state <= S_IDLE;
            end else begin
              left_q   <= left_q - 32'd1;
              slot_q   <= '0;
              bucket_q <= bucket_q + 1'b1;
              state    <= S_ISSUE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
