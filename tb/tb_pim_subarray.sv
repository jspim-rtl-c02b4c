// tb_pim_subarray: small subarray (8 rows of 256 bits, 5 slots of 46
// bits). Fills every row through column writes, then runs random
// activations, slot writes, column writes and searches, checking the row
// buffer contents, slot/column reads and the search result (hit, slot,
// value, dup, null on miss) against a shadow copy of the cells.
module tb_pim_subarray;
  localparam int unsigned ROWS = 8, ROW_BITS = 256, TAG_W = 12, VAL_W = 32;
  localparam int unsigned ENTRY_W = TAG_W + VAL_W + 2, SLOTS = ROW_BITS / ENTRY_W;
  localparam int unsigned SLOT_W = $clog2(SLOTS), NCOL = ROW_BITS / 64, COL_W = $clog2(NCOL);

  logic clk = 0;
  always #5 clk = ~clk;

  logic               act, wr_slot_en, wr_col_en;
  logic [2:0]         act_row;
  logic [TAG_W-1:0]   probe_tag;
  logic               m_hit, m_dup;
  logic [SLOT_W-1:0]  m_slot, slot_addr;
  logic [VAL_W-1:0]   m_value;
  logic [ENTRY_W-1:0] wr_entry, rd_entry;
  logic [COL_W-1:0]   col_addr;
  logic [63:0]        wr_col_data, rd_col_data;

  pim_subarray #(.ROWS(ROWS), .ROW_BITS(ROW_BITS), .TAG_W(TAG_W), .VAL_W(VAL_W)) dut (.*);

  logic [ROW_BITS-1:0] shadow [ROWS];
  int cur;
  int checks = 0, failures = 0;

  task automatic do_act(int r);
    @(negedge clk); act = 1; act_row = 3'(r);
    @(negedge clk); act = 0; cur = r;
  endtask
  task automatic do_col_wr(int c, logic [63:0] d);
    @(negedge clk); wr_col_en = 1; col_addr = COL_W'(c); wr_col_data = d;
    @(negedge clk); wr_col_en = 0;
    shadow[cur][c*64 +: 64] = d;
  endtask
  task automatic do_slot_wr(int s, logic [ENTRY_W-1:0] e);
    @(negedge clk); wr_slot_en = 1; slot_addr = SLOT_W'(s); wr_entry = e;
    @(negedge clk); wr_slot_en = 0;
    shadow[cur][s*ENTRY_W +: ENTRY_W] = e;
  endtask
  task automatic check_search(logic [TAG_W-1:0] t);
    logic exp_hit, exp_dup; int exp_slot; logic [VAL_W-1:0] exp_val;
    logic [ENTRY_W-1:0] e;
    probe_tag = t; #1;
    exp_hit = 0; exp_slot = 0; exp_val = '0; exp_dup = 0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      e = shadow[cur][s*ENTRY_W +: ENTRY_W];
      if (e[ENTRY_W-1] && e[VAL_W +: TAG_W] == t) begin
        exp_hit = 1; exp_slot = s; exp_val = e[VAL_W-1:0]; exp_dup = e[ENTRY_W-2];
      end
    end
    checks++;
    if (m_hit !== exp_hit || m_slot !== SLOT_W'(exp_slot) || m_value !== exp_val || m_dup !== exp_dup) begin
      failures++;
      $display("FAIL search row %0d tag %h: hit %0b/%0b slot %0d/%0d val %h/%h", cur, t,
               m_hit, exp_hit, m_slot, exp_slot, m_value, exp_val);
    end
  endtask
  task automatic check_reads(int s, int c);
    slot_addr = SLOT_W'(s); col_addr = COL_W'(c); #1;
    checks++;
    if (rd_entry !== shadow[cur][s*ENTRY_W +: ENTRY_W] || rd_col_data !== shadow[cur][c*64 +: 64]) begin
      failures++;
      $display("FAIL read row %0d slot %0d col %0d", cur, s, c);
    end
  endtask

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    act = 0; wr_slot_en = 0; wr_col_en = 0; act_row = 0; probe_tag = 0;
    slot_addr = 0; wr_entry = 0; col_addr = 0; wr_col_data = 0;
    for (int r = 0; r < ROWS; r++) begin
      do_act(r);
      for (int c = 0; c < NCOL; c++) do_col_wr(c, {$urandom, $urandom});
    end
    for (int it = 0; it < 400; it++) begin
      int op;
      op = $urandom_range(0, 9);
      if (op == 0) do_act($urandom_range(0, ROWS - 1));
      else if (op == 1) do_col_wr($urandom_range(0, NCOL - 1), {$urandom, $urandom});
      else if (op <= 4) do_slot_wr($urandom_range(0, SLOTS - 1),
                                   {1'b1, 1'($urandom), TAG_W'($urandom_range(0, 15)), VAL_W'($urandom)});
      else begin
        check_search(TAG_W'($urandom_range(0, 15)));
        check_reads($urandom_range(0, SLOTS - 1), $urandom_range(0, NCOL - 1));
      end
    end
    // the cells keep what was written: reopen every row and compare
    for (int r = 0; r < ROWS; r++) begin
      do_act(r);
      for (int s = 0; s < SLOTS; s++) check_reads(s, s % NCOL);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
