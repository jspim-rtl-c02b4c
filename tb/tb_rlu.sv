// tb_rlu: the RLU with a small PIM chip (2 banks x 32 rows x 512 bits,
// 8 slots per bucket). The host model builds four buckets through
// special-address writes, then streams 240 fact keys (present keys, absent
// keys, runs of repeated keys) as 4-key bursts while the result consumer
// is first fast, then slow. Checks every join record in order, and that
// key-buffer stalls, window-filtered keys, null results and duplicate
// flags all occurred; then an index update on a key that sits in the
// window must be seen by the next probe of that key (window emptied), and
// select where must return the new value.
module tb_rlu;
  import jspim_pkg::*;
  localparam int unsigned NB = 2, RPB = 32, RPS = 8, ROW_BITS = 512, KPB = 4;
  localparam int unsigned NK_W = $clog2(KPB + 1);
  localparam logic [ADDR_W-1:0] BASE = 40'hFF_FFFF_0000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic wr_valid, wr_ready, pim_mode, burst_valid, burst_ready, res_valid, res_ready, busy;
  logic [ADDR_W-1:0] wr_addr; logic [CMD_DATA_W-1:0] wr_data;
  logic [KPB-1:0][KEY_W-1:0] burst_keys; logic [NK_W-1:0] burst_nkeys;
  result_t res;
  logic [31:0] stall_cycles, filtered_count, ignored_cmds, acts, srch;

  `include "tb/tb_join_tasks.svh"

  localparam int unsigned SLOT_W = $clog2(SLOTS), COL_W = $clog2(ROW_BITS / 64), ROW_W = $clog2(RPB);
  logic chip_req_valid, chip_req_ready, chip_rsp_valid, chip_rsp_hit, chip_rsp_dup;
  pim_op_e chip_req_op; logic [0:0] chip_req_bank; logic [ROW_W-1:0] chip_req_row;
  logic [SLOT_W-1:0] chip_req_slot, chip_rsp_slot; logic [COL_W-1:0] chip_req_col;
  logic [TAG_W-1:0] chip_req_tag; logic [ENTRY_W-1:0] chip_req_entry, chip_rsp_entry;
  val_t chip_rsp_value; logic [63:0] rdata;

  rlu #(.NUM_BANKS(NB), .ROWS_PER_BANK(RPB), .ROW_BITS(ROW_BITS), .KEYS_PER_BURST(KPB),
        .KEY_BUF_DEPTH(2), .CMD_BASE(BASE)) dut (.*, .ignored_cmds(ignored_cmds));
  pim_chip #(.NUM_BANKS(NB), .ROWS_PER_BANK(RPB), .ROWS_PER_SA(RPS), .ROW_BITS(ROW_BITS),
             .T_RP(3), .T_RCD(4), .T_CL(3), .T_CMP(0)) u_chip (
    .clk, .rst_n, .req_valid(chip_req_valid), .req_ready(chip_req_ready), .req_op(chip_req_op),
    .req_bank(chip_req_bank), .req_row(chip_req_row), .req_slot(chip_req_slot),
    .req_col(chip_req_col), .req_tag(chip_req_tag), .req_entry(chip_req_entry), .req_wdata('0),
    .rsp_valid(chip_rsp_valid), .rsp_hit(chip_rsp_hit), .rsp_slot(chip_rsp_slot),
    .rsp_value(chip_rsp_value), .rsp_dup(chip_rsp_dup), .rsp_entry(chip_rsp_entry),
    .rsp_rdata(rdata), .act_count(acts), .search_count(srch));

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int bk[4] = '{5, 6, 33, 62};
    key_t ks[$];
    logic [CMD_DATA_W-1:0] d;
    wr_valid = 0; wr_addr = 0; wr_data = 0; burst_valid = 0; burst_keys = '0; burst_nkeys = 0;
    rst_n = 0; #12 rst_n = 1;
    chk(pim_mode, "PIM mode after reset");
    foreach (bk[i]) begin clear_bucket(bk[i]); fill_bucket(bk[i], 0, 6, i); end
    // key stream
    for (int i = 0; i < 240; i++) begin
      int b, r;
      b = bk[$urandom_range(0, 3)];
      r = $urandom_range(0, 9);
      if (r < 7) ks.push_back(key_in(b, $urandom_range(0, 5)));
      else if (r < 8) ks.push_back(key_absent(b));
      else begin
        key_t k; k = key_in(b, $urandom_range(0, 5));
        repeat ($urandom_range(2, 5)) ks.push_back(k);
      end
    end
    fork
      send_keys(ks);
      begin
        repeat (300) @(posedge clk);
        slow_consumer = 1;
        repeat (2000) @(posedge clk);
        slow_consumer = 0;
      end
    join_none
    check_join(ks, 200000);
    chk(stall_cycles > 0, "key-buffer stall happened");
    chk(filtered_count > 0, "window filtered some keys");
    chk(srch + filtered_count == 32'(ks.size()), "every key was searched or filtered");
    chk(n_null > 0 && n_dupflag > 0, "null results and duplicate flags seen");
    $display("stalls %0d filtered %0d searches %0d activations %0d null %0d dup %0d",
             stall_cycles, filtered_count, srch, acts, n_null, n_dupflag);
    // index update on a key that is in the window
    begin
      key_t k; key_t one[$];
      k = key_in(bk[1], 2);
      one.push_back(k);
      send_keys(one); check_join(one, 10000);
      d = '0; d[31:0] = k; d[63:32] = 32'h0BAD_F00D; d[64] = 1'b0;
      host_wr(CMD_INDEX_UPDATE, d);
      img[bk[1]][2] = {1'b1, 1'b0, k[KEY_W-1 -: TAG_W], 32'h0BAD_F00D};
      wait_results(1, 10000);
      chk(got_q.size() == 1 && got_q[0].kind == RES_UPDATE && got_q[0].hit, "index update acknowledged");
      got_q.delete();
      send_keys(one); check_join(one, 10000);
      d = '0; d[31:0] = k;
      host_wr(CMD_SELECT_WHERE, d);
      wait_results(1, 10000);
      chk(got_q.size() == 1 && got_q[0].kind == RES_SELECT && got_q[0].hit && got_q[0].value == 32'h0BAD_F00D,
          "select where after update");
      got_q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
