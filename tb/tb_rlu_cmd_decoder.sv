// tb_rlu_cmd_decoder: writes every command to its special address and a few
// ordinary addresses; checks the mode bit, that PIM_OFF mode drops commands
// (and counts them), the decoded fields of each command, and that the
// one-entry command register holds the host off (wr_ready low) until taken.
module tb_rlu_cmd_decoder;
  import jspim_pkg::*;
  localparam logic [ADDR_W-1:0] BASE = 40'hFF_FFFF_0000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, wr_valid, wr_ready, pim_mode, cmd_valid, cmd_ready;
  logic [ADDR_W-1:0]     wr_addr;
  logic [CMD_DATA_W-1:0] wr_data;
  cmd_req_t cmd;
  logic [31:0] ignored;

  rlu_cmd_decoder #(.CMD_BASE(BASE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(logic [ADDR_W-1:0] a, logic [CMD_DATA_W-1:0] d);
    @(negedge clk); wr_valid = 1; wr_addr = a; wr_data = d;
    @(posedge clk); while (!wr_ready) @(posedge clk);
    #1 wr_valid = 0;
  endtask
  task automatic take(output cmd_req_t c, output logic got);
    got = 0;
    repeat (3) begin
      @(negedge clk);
      if (cmd_valid) begin c = cmd; got = 1; cmd_ready = 1; @(negedge clk); cmd_ready = 0; break; end
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    cmd_req_t c; logic got;
    logic [CMD_DATA_W-1:0] d;
    rst_n = 0; wr_valid = 0; wr_addr = 0; wr_data = 0; cmd_ready = 0;
    #12 rst_n = 1;
    chk(pim_mode == 1'b1, "PIM mode after reset");
    // select where
    d = '0; d[31:0] = 32'hDEAD_BEEF;
    wr(BASE + 64*2, d);
    @(negedge clk);
    chk(!wr_ready, "held while command pending");
    take(c, got);
    chk(got && c.op == CMD_SELECT_WHERE && c.key == 32'hDEAD_BEEF, "select where decode");
    // index update
    d = '0; d[31:0] = 32'h1234_5678; d[63:32] = 32'hCAFE_0001; d[64] = 1;
    wr(BASE + 64*5, d); take(c, got);
    chk(got && c.op == CMD_INDEX_UPDATE && c.key == 32'h1234_5678 && c.value == 32'hCAFE_0001 && c.dup,
        "index update decode");
    // entry update
    d = '0; d[31:0] = 32'd77; d[47:32] = 16'd5; d[48] = 0; d[49] = 1; d[95:64] = 32'hABCD; d[127:96] = 32'h55;
    wr(BASE + 64*4, d); take(c, got);
    chk(got && c.op == CMD_ENTRY_UPDATE && c.bucket == 77 && c.slot == 5 && c.valid && !c.dup &&
        c.key == 32'hABCD && c.value == 32'h55, "entry update decode");
    // table update with 3 entries
    d = '0; d[31:0] = 32'd9; d[47:32] = 16'd2; d[50:48] = 3'd3;
    for (int i = 0; i < 3; i++) d[64*(i+1) +: 64] = {32'(i + 100), 32'(i)};
    wr(BASE + 64*6, d); take(c, got);
    chk(got && c.op == CMD_TABLE_UPDATE && c.bucket == 9 && c.slot == 2 && c.count == 3 &&
        c.tu_data[1] == {32'd101, 32'd1}, "table update decode");
    // select distinct
    d = '0; d[31:0] = 32'd4; d[63:32] = 32'd2;
    wr(BASE + 64*3, d); take(c, got);
    chk(got && c.op == CMD_SELECT_DISTINCT && c.bucket == 4 && c.count == 2, "select distinct decode");
    // ordinary writes are not commands
    wr(BASE + 64*2 + 8, d); take(c, got); chk(!got, "unaligned address is not a command");
    wr(BASE - 64, d);       take(c, got); chk(!got, "address below base is not a command");
    wr(BASE + 64*9, d);     take(c, got); chk(!got, "unused offset is not a command");
    // PIM off: commands are dropped
    wr(BASE + 64*1, '0);
    @(negedge clk); chk(pim_mode == 0, "memory mode after PIM_OFF");
    wr(BASE + 64*2, d); take(c, got);
    chk(!got && ignored == 1, "command ignored in memory mode");
    wr(BASE + 64*0, '0);
    @(negedge clk); chk(pim_mode == 1, "PIM mode after PIM_START");
    wr(BASE + 64*2, d); take(c, got);
    chk(got && c.op == CMD_SELECT_WHERE, "command accepted again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
