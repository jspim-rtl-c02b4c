// tb_rlu_pim_ctrl: the PIM controller driving a small pim_chip (2 banks x
// 32 rows x 512 bits: 64 buckets, 26-bit tags, 8 slots per bucket). Clears
// four buckets with entry updates, fills them with table updates, then
// checks probe searches (hits and null results), select where, index update
// (present and absent key), erasing an entry with an entry update, and
// select distinct over two buckets, all against a slot-level model. Also
// checks that `upd` pulses once per slot write.
module tb_rlu_pim_ctrl;
  import jspim_pkg::*;
  localparam int unsigned NB = 2, RPB = 32, RPS = 8, ROW_BITS = 512;
  localparam int unsigned BUCKET_W = $clog2(NB * RPB), TAG_W = KEY_W - BUCKET_W;
  localparam int unsigned ENTRY_W = TAG_W + VAL_W + 2, SLOTS = ROW_BITS / ENTRY_W;
  localparam int unsigned SLOT_W = $clog2(SLOTS), COL_W = $clog2(ROW_BITS / 64), ROW_W = $clog2(RPB);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic pr_valid, pr_ready, pr_rsp_valid, pr_rsp_hit, pr_rsp_dup;
  key_t pr_key; val_t pr_rsp_value;
  logic cmd_valid, cmd_ready; cmd_req_t cmd;
  logic res_valid, res_ready, upd, busy; result_t res;
  logic chip_req_valid, chip_req_ready, chip_rsp_valid, chip_rsp_hit, chip_rsp_dup;
  pim_op_e chip_req_op;
  logic [0:0] chip_req_bank; logic [ROW_W-1:0] chip_req_row;
  logic [SLOT_W-1:0] chip_req_slot, chip_rsp_slot; logic [COL_W-1:0] chip_req_col;
  logic [TAG_W-1:0] chip_req_tag; logic [ENTRY_W-1:0] chip_req_entry, chip_rsp_entry;
  val_t chip_rsp_value; logic [63:0] rdata; logic [31:0] acts, srch;

  rlu_pim_ctrl #(.NUM_BANKS(NB), .ROWS_PER_BANK(RPB), .ROW_BITS(ROW_BITS)) dut (.*);
  pim_chip #(.NUM_BANKS(NB), .ROWS_PER_BANK(RPB), .ROWS_PER_SA(RPS), .ROW_BITS(ROW_BITS),
             .T_RP(3), .T_RCD(4), .T_CL(3), .T_CMP(0)) u_chip (
    .clk, .rst_n, .req_valid(chip_req_valid), .req_ready(chip_req_ready), .req_op(chip_req_op),
    .req_bank(chip_req_bank), .req_row(chip_req_row), .req_slot(chip_req_slot),
    .req_col(chip_req_col), .req_tag(chip_req_tag), .req_entry(chip_req_entry), .req_wdata('0),
    .rsp_valid(chip_rsp_valid), .rsp_hit(chip_rsp_hit), .rsp_slot(chip_rsp_slot),
    .rsp_value(chip_rsp_value), .rsp_dup(chip_rsp_dup), .rsp_entry(chip_rsp_entry),
    .rsp_rdata(rdata), .act_count(acts), .search_count(srch));

  // model: per bucket, per slot {valid, dup, tag, value}
  logic [ENTRY_W-1:0] model [NB*RPB][SLOTS];
  int checks = 0, failures = 0, upd_pulses = 0, writes = 0;
  result_t got_q[$];

  always @(posedge clk) if (rst_n && upd) upd_pulses++;
  assign res_ready = 1'b1;
  always @(posedge clk) if (rst_n && res_valid) got_q.push_back(res);

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask
  function automatic key_t mk_key(int b, logic [TAG_W-1:0] t);
    return {t, BUCKET_W'(b)};
  endfunction
  task automatic lookup(key_t k, output logic hit, output logic dup, output val_t v, output int slot);
    int b; logic [ENTRY_W-1:0] e;
    b = int'(k[BUCKET_W-1:0]); hit = 0; dup = 0; v = '0; slot = 0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      e = model[b][s];
      if (e[ENTRY_W-1] && e[VAL_W +: TAG_W] == k[KEY_W-1 -: TAG_W]) begin hit = 1; dup = e[ENTRY_W-2]; v = e[VAL_W-1:0]; slot = s; end
    end
  endtask
  task automatic send_cmd(cmd_req_t c);
    @(negedge clk); cmd_valid = 1; cmd = c;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
    @(posedge clk); while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask
  task automatic probe(key_t k);
    logic h, d; val_t v; int s;
    @(negedge clk); pr_valid = 1; pr_key = k;
    @(posedge clk); while (!pr_ready) @(posedge clk);
    #1 pr_valid = 0;
    @(posedge clk); while (!pr_rsp_valid) @(posedge clk);
    lookup(k, h, d, v, s);
    chk(pr_rsp_hit == h && (!h || (pr_rsp_value == v && pr_rsp_dup == d)) && (h || pr_rsp_value == 0),
        $sformatf("probe %h hit %0b/%0b value %h/%h", k, pr_rsp_hit, h, pr_rsp_value, v));
  endtask

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    cmd_req_t c;
    int bk[4] = '{3, 10, 11, 40};
    pr_valid = 0; pr_key = 0; cmd_valid = 0; cmd = '0;
    rst_n = 0; #12 rst_n = 1;
    // clear the buckets
    foreach (bk[i]) for (int s = 0; s < SLOTS; s++) begin
      c = '0; c.op = CMD_ENTRY_UPDATE; c.bucket = bk[i]; c.slot = 16'(s); c.valid = 0;
      send_cmd(c); model[bk[i]][s] = '0; writes++;
    end
    // fill with table updates: 7 entries from slot 0, then one more at slot 7
    foreach (bk[i]) begin
      c = '0; c.op = CMD_TABLE_UPDATE; c.bucket = bk[i]; c.slot = 0; c.count = 7;
      for (int j = 0; j < 7; j++) begin
        logic [TAG_W-1:0] t; val_t v; logic d;
        t = TAG_W'(j * 37 + i * 1000 + 5); v = $urandom; d = (j == 2);
        c.tu_data[j] = {d, 31'(t), v};
        model[bk[i]][j] = {1'b1, d, t, v}; writes++;
      end
      send_cmd(c);
      c = '0; c.op = CMD_TABLE_UPDATE; c.bucket = bk[i]; c.slot = 7; c.count = 3;  // 2 dropped
      c.tu_data[0] = {1'b0, 31'(TAG_W'(999 + i)), 32'hF00D_0000 + 32'(i)};
      model[bk[i]][7] = {1'b1, 1'b0, TAG_W'(999 + i), 32'hF00D_0000 + 32'(i)}; writes++;
      send_cmd(c);
    end
    chk(upd_pulses == writes, $sformatf("upd pulses %0d writes %0d", upd_pulses, writes));
    // probes: present and absent keys
    foreach (bk[i]) for (int j = 0; j < 8; j++) probe(mk_key(bk[i], TAG_W'(j * 37 + i * 1000 + 5)));
    foreach (bk[i]) probe(mk_key(bk[i], TAG_W'(999 + i)));
    foreach (bk[i]) probe(mk_key(bk[i], TAG_W'(12345)));
    // select where
    got_q.delete();
    c = '0; c.op = CMD_SELECT_WHERE; c.key = mk_key(10, TAG_W'(1 * 37 + 1000 + 5)); send_cmd(c);
    chk(got_q.size() == 1 && got_q[0].kind == RES_SELECT && got_q[0].hit &&
        got_q[0].value == model[10][1][VAL_W-1:0], "select where hit");
    got_q.delete();
    c.key = mk_key(10, TAG_W'(4)); send_cmd(c);
    chk(got_q.size() == 1 && !got_q[0].hit && got_q[0].value == 0, "select where null");
    // index update: present key
    got_q.delete();
    c = '0; c.op = CMD_INDEX_UPDATE; c.key = mk_key(40, TAG_W'(3 * 37 + 3000 + 5)); c.value = 32'h7777_0001; c.dup = 1;
    send_cmd(c);
    model[40][3] = {1'b1, 1'b1, TAG_W'(3 * 37 + 3000 + 5), 32'h7777_0001};
    chk(got_q.size() == 1 && got_q[0].kind == RES_UPDATE && got_q[0].hit, "index update hit");
    probe(c.key);
    got_q.delete();
    c.key = mk_key(40, TAG_W'(7)); send_cmd(c);
    chk(got_q.size() == 1 && got_q[0].kind == RES_UPDATE && !got_q[0].hit, "index update miss");
    // entry update erases slot 5 of bucket 11
    c = '0; c.op = CMD_ENTRY_UPDATE; c.bucket = 11; c.slot = 5; c.valid = 0; send_cmd(c);
    model[11][5] = '0;
    probe(mk_key(11, TAG_W'(5 * 37 + 2000 + 5)));
    // select distinct over buckets 10 and 11
    got_q.delete();
    c = '0; c.op = CMD_SELECT_DISTINCT; c.bucket = 10; c.count = 2; send_cmd(c);
    begin
      int n; n = 0;
      for (int b = 10; b <= 11; b++) for (int s = 0; s < SLOTS; s++) if (model[b][s][ENTRY_W-1]) begin
        chk(n < got_q.size() && got_q[n].kind == RES_DISTINCT &&
            got_q[n].key == mk_key(b, model[b][s][VAL_W +: TAG_W]) &&
            got_q[n].value == model[b][s][VAL_W-1:0] && got_q[n].dup == model[b][s][ENTRY_W-2],
            $sformatf("distinct record %0d", n));
        n++;
      end
      chk(got_q.size() == n, $sformatf("distinct count %0d expected %0d", got_q.size(), n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
