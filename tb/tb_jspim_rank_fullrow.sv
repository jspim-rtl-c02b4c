// tb_jspim_rank_fullrow: end-to-end test of the rank with full-size rows
// and banks of the default design (16 banks, 8192-bit rows, 16-key bursts,
// DDR4-3200 22-22-22 timings) but only 64 rows per bank in 2 subarrays of
// 32 rows, so that the model builds in about a minute (the default chip has
// 1024 subarrays of 1024 rows). With 1024 buckets the stored tag is 22 bits,
// so a row holds 146 slots of 56 bits instead of the default 178 of 46. Runs the same shared
// sequence as tb_jspim_rank on four buckets spread over the chip (two share
// bank 5, one sits in the last row of the last bank), each filled with 24
// entries, and a 200-key join. Each mechanism is counted and must have
// happened.
module tb_jspim_rank_fullrow;
  import jspim_pkg::*;
  localparam int unsigned NB = 16, RPB = 64, RPS = 32, ROW_BITS = 8192, KPB = 16;
  localparam int unsigned T_RP = 22, T_RCD = 22;
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

  jspim_rank #(.ROWS_PER_BANK(RPB), .ROWS_PER_SA(RPS)) dut (.*);

  initial begin
    #200000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_addr = 0; wr_data = 0; burst_valid = 0; burst_keys = '0; burst_nkeys = 0;
    mem_req_valid = 0; mem_we = 0; mem_bank = 0; mem_row = 0; mem_col = 0; mem_wdata = 0;
    rst_n = 0; #12 rst_n = 1;
    run_sequence(200, 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
