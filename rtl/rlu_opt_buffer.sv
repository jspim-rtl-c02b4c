// rlu_opt_buffer: the RLU's optimization (coalescing) window.
//
// Keeps the last WINDOW (8, as evaluated in the paper) distinct probe keys
// that went to the PIM chip together with their search result. Each
// incoming fact key is compared with all window entries at once:
//   - found:     the stored result is returned; no PIM search is issued
//                (a filtered, redundant request);
//   - not found: the key is sent to the PIM controller, and when the
//                result comes back it replaces the oldest window entry
//                (FIFO replacement) and is returned.
// A key repeated outside the window is searched again. Results leave as
// RES_JOIN records {key, hit, dup, value} on a valid/ready port, in key
// order. `invalidate` (pulsed after any hash-table update) empties the
// window so no stale value is served. One key is handled at a time.
// The window size is the paper's; the replacement policy, the blocking
// one-key-at-a-time flow and the invalidation are this design's choices.
module rlu_opt_buffer
  import jspim_pkg::*;
#(
  parameter int unsigned WINDOW = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        invalidate,
  // keys from the key buffer
  input  logic        key_valid,
  output logic        key_ready,
  input  key_t        key,
  // searches towards the PIM controller
  output logic        pr_valid,
  input  logic        pr_ready,
  output key_t        pr_key,
  input  logic        pr_rsp_valid,
  input  logic        pr_rsp_hit,
  input  logic        pr_rsp_dup,
  input  val_t        pr_rsp_value,
  // join results
  output logic        res_valid,
  input  logic        res_ready,
  output result_t     res,
  output logic [31:0] filtered_count,
  output logic        busy
);
  localparam int unsigned PTR_W = (WINDOW > 1) ? $clog2(WINDOW) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_OUT} state_e;
  state_e state;

  logic [WINDOW-1:0] w_valid;
  key_t              w_key   [WINDOW];
  logic              w_hit   [WINDOW];
  logic              w_dup   [WINDOW];
  val_t              w_value [WINDOW];
  logic [PTR_W-1:0]  w_ptr;

  // Associative lookup of the incoming key.
  logic             found;
  logic [PTR_W-1:0] found_idx;
  always_comb begin
    found     = 1'b0;
    found_idx = '0;
    for (int i = 0; i < WINDOW; i++) begin
      if (w_valid[i] && w_key[i] == key && !found) begin
        found     = 1'b1;
        found_idx = PTR_W'(i);
      end
    end
  end

  key_t cur_key;
  assign key_ready = (state == S_IDLE);
  assign pr_valid  = (state == S_ISSUE);
  assign pr_key    = cur_key;
  assign res_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      w_valid        <= '0;
      w_ptr          <= '0;
      cur_key        <= '0;
      res            <= '0;
      filtered_count <= '0;
      for (int i = 0; i < WINDOW; i++) begin
        w_key[i]   <= '0;
        w_hit[i]   <= 1'b0;
        w_dup[i]   <= 1'b0;
        w_value[i] <= '0;
      end
    end else begin
      if (invalidate) w_valid <= '0;
      unique case (state)
        S_IDLE: if (key_valid) begin
          cur_key <= key;
          if (found && !invalidate) begin
            res.kind       <= RES_JOIN;
            res.key        <= key;
            res.hit        <= w_hit[found_idx];
            res.dup        <= w_dup[found_idx];
            res.value      <= w_value[found_idx];
            filtered_count <= filtered_count + 32'd1;
            state          <= S_OUT;
          end else begin
            state <= S_ISSUE;
          end
        end
        S_ISSUE: if (pr_ready) state <= S_WAIT;
        S_WAIT: if (pr_rsp_valid) begin
          res.kind  <= RES_JOIN;
          res.key   <= cur_key;
          res.hit   <= pr_rsp_hit;
          res.dup   <= pr_rsp_dup;
          res.value <= pr_rsp_value;
          if (!invalidate) begin
            w_valid[w_ptr] <= 1'b1;
            w_key[w_ptr]   <= cur_key;
            w_hit[w_ptr]   <= pr_rsp_hit;
            w_dup[w_ptr]   <= pr_rsp_dup;
            w_value[w_ptr] <= pr_rsp_value;
            w_ptr          <= (w_ptr == PTR_W'(WINDOW - 1)) ? '0 : w_ptr + 1'b1;
          end
          state <= S_OUT;
        end
        S_OUT: if (res_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
