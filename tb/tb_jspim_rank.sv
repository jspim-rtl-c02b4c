// tb_jspim_rank: end-to-end test of a reduced rank (2 banks x 32 rows x
// 512-bit rows, 8 slots per bucket, 4-key bursts, short DRAM timings).
// Runs the shared sequence: hash-table build through table updates, a
// 300-key join with repeats and a slow consumer, select-where latency with
// the row open and with a row conflict, index update seen through the
// optimization window, entry update, select distinct, PIM off (commands
// dropped, keys refused, PIM chip used as DRAM), PIM start, join again.
// Each mechanism is counted and must have happened.
module tb_jspim_rank;
  import jspim_pkg::*;
  localparam int unsigned NB = 2, RPB = 32, RPS = 8, ROW_BITS = 512, KPB = 4;
  localparam int unsigned T_RP = 3, T_RCD = 4;
  localparam int unsigned NK_W = $clog2(KPB + 1);
  localparam logic [ADDR_W-1:0] BASE = 40'hFF_FFFF_0000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic wr_valid, wr_ready, pim_mode, burst_valid, burst_ready, res_valid, res_ready, busy;
  logic [ADDR_W-1:0] wr_addr; logic [CMD_DATA_W-1:0] wr_data;
  logic [KPB-1:0][KEY_W-1:0] burst_keys; logic [NK_W-1:0] burst_nkeys;
  result_t res;
  logic [31:0] stall_cycles, filtered_count, ignored_cmds, act_count, search_count;

  `include "tb/tb_join_tasks.svh"

  localparam int unsigned COL_W = $clog2(ROW_BITS / 64), ROW_W = $clog2(RPB), BANK_W = $clog2(NB);
  logic mem_req_valid, mem_req_ready, mem_we, mem_rsp_valid;
  logic [BANK_W-1:0] mem_bank; logic [ROW_W-1:0] mem_row; logic [COL_W-1:0] mem_col;
  logic [63:0] mem_wdata, mem_rdata;

  `include "tb/tb_rank_sequence.svh"

  jspim_rank #(.NUM_BANKS(NB), .ROWS_PER_BANK(RPB), .ROWS_PER_SA(RPS), .ROW_BITS(ROW_BITS),
               .T_RP(T_RP), .T_RCD(T_RCD), .T_CL(3), .T_CMP(0), .KEYS_PER_BURST(KPB),
               .KEY_BUF_DEPTH(2), .CMD_BASE(BASE)) dut (.*);

  initial begin
    #50000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_addr = 0; wr_data = 0; burst_valid = 0; burst_keys = '0; burst_nkeys = 0;
    mem_req_valid = 0; mem_we = 0; mem_bank = 0; mem_row = 0; mem_col = 0; mem_wdata = 0;
    rst_n = 0; #12 rst_n = 1;
    run_sequence(300, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
