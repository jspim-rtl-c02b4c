// tb_pim_bank: bank of 4 subarrays x 8 rows x 256 bits. Fills all rows via
// column writes, then random activate / precharge / slot write / search /
// read, checking the open-row tracking, that accesses reach the subarray
// holding the open row (and no other) and the search results, against a
// shadow copy of the bank.
module tb_pim_bank;
  localparam int unsigned RPB = 32, RPS = 8, ROW_BITS = 256, TAG_W = 12, VAL_W = 32;
  localparam int unsigned ENTRY_W = TAG_W + VAL_W + 2, SLOTS = ROW_BITS / ENTRY_W;
  localparam int unsigned SLOT_W = $clog2(SLOTS), NCOL = ROW_BITS / 64, COL_W = $clog2(NCOL);
  localparam int unsigned ROW_W = $clog2(RPB);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic               act, pre, open_valid, wr_slot_en, wr_col_en, m_hit, m_dup;
  logic [ROW_W-1:0]   row, open_row;
  logic [TAG_W-1:0]   probe_tag;
  logic [SLOT_W-1:0]  m_slot, slot_addr;
  logic [VAL_W-1:0]   m_value;
  logic [ENTRY_W-1:0] wr_entry, rd_entry;
  logic [COL_W-1:0]   col_addr;
  logic [63:0]        wr_col_data, rd_col_data;

  pim_bank #(.ROWS_PER_BANK(RPB), .ROWS_PER_SA(RPS), .ROW_BITS(ROW_BITS), .TAG_W(TAG_W),
             .VAL_W(VAL_W)) dut (.*);

  logic [ROW_BITS-1:0] shadow [RPB];
  int cur = -1;
  int checks = 0, failures = 0;

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic do_act(int r);
    @(negedge clk); act = 1; row = ROW_W'(r);
    @(negedge clk); act = 0; cur = r;
    chk(open_valid && open_row == ROW_W'(r), "open row after act");
  endtask
  task automatic do_pre();
    @(negedge clk); pre = 1;
    @(negedge clk); pre = 0; cur = -1;
    chk(!open_valid, "closed after pre");
  endtask
  task automatic do_col_wr(int c, logic [63:0] d);
    @(negedge clk); wr_col_en = 1; col_addr = COL_W'(c); wr_col_data = d;
    @(negedge clk); wr_col_en = 0;
    if (cur >= 0) shadow[cur][c*64 +: 64] = d;
  endtask
  task automatic do_slot_wr(int s, logic [ENTRY_W-1:0] e);
    @(negedge clk); wr_slot_en = 1; slot_addr = SLOT_W'(s); wr_entry = e;
    @(negedge clk); wr_slot_en = 0;
    if (cur >= 0) shadow[cur][s*ENTRY_W +: ENTRY_W] = e;
  endtask
  task automatic check_open(logic [TAG_W-1:0] t, int s, int c);
    logic exp_hit; int exp_slot; logic [VAL_W-1:0] exp_val; logic [ENTRY_W-1:0] e;
    probe_tag = t; slot_addr = SLOT_W'(s); col_addr = COL_W'(c); #1;
    exp_hit = 0; exp_slot = 0; exp_val = '0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      e = shadow[cur][i*ENTRY_W +: ENTRY_W];
      if (e[ENTRY_W-1] && e[VAL_W +: TAG_W] == t) begin exp_hit = 1; exp_slot = i; exp_val = e[VAL_W-1:0]; end
    end
    chk(m_hit == exp_hit && m_slot == SLOT_W'(exp_slot) && m_value == exp_val, $sformatf("search row %0d", cur));
    chk(rd_entry == shadow[cur][s*ENTRY_W +: ENTRY_W] && rd_col_data == shadow[cur][c*64 +: 64],
        $sformatf("read row %0d", cur));
  endtask

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst_n = 0; act = 0; pre = 0; wr_slot_en = 0; wr_col_en = 0; row = 0; probe_tag = 0;
    slot_addr = 0; wr_entry = 0; col_addr = 0; wr_col_data = 0;
    #12 rst_n = 1;
    chk(!open_valid, "closed after reset");
    for (int r = 0; r < RPB; r++) begin
      do_act(r);
      for (int c = 0; c < NCOL; c++) do_col_wr(c, {$urandom, $urandom});
      do_pre();
    end
    for (int it = 0; it < 600; it++) begin
      int op;
      op = $urandom_range(0, 9);
      if (op == 0) begin
        if (cur >= 0) do_pre();
        do_act($urandom_range(0, RPB - 1));
      end else if (cur < 0) begin
        do_act($urandom_range(0, RPB - 1));
      end else if (op <= 3) begin
        do_slot_wr($urandom_range(0, SLOTS - 1), {1'b1, 1'($urandom), TAG_W'($urandom_range(0, 7)), VAL_W'($urandom)});
      end else if (op == 4) begin
        do_col_wr($urandom_range(0, NCOL - 1), {$urandom, $urandom});
      end else begin
        check_open(TAG_W'($urandom_range(0, 7)), $urandom_range(0, SLOTS - 1), $urandom_range(0, NCOL - 1));
      end
    end
    if (cur >= 0) do_pre();
    for (int r = 0; r < RPB; r++) begin
      do_act(r);
      for (int c = 0; c < NCOL; c++) check_open(TAG_W'(c), c % SLOTS, c);
      do_pre();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
