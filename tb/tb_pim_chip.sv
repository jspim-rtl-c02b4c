// tb_pim_chip: 2 banks x 32 rows x 256 bits, T_RP=3, T_RCD=4, T_CL=3,
// T_CMP=1. Fills every row with column writes, then random searches, slot
// writes, slot reads and column reads/writes over both banks. Checks each
// response against a shadow copy, and checks the response latency of every
// operation for the three row states: row already open (2 + d cycles),
// bank closed (2 + T_RCD + d) and other row open (2 + T_RP + T_RCD + d),
// where d is T_CMP for a search, T_CL-1 for a read and 0 for a write. Also
// checks the activation and search counters.
module tb_pim_chip;
  import jspim_pkg::*;
  localparam int unsigned NB = 2, RPB = 32, RPS = 8, ROW_BITS = 256, TAG_W = 12;
  localparam int unsigned T_RP = 3, T_RCD = 4, T_CL = 3, T_CMP = 1;
  localparam int unsigned ENTRY_W = TAG_W + VAL_W + 2, SLOTS = ROW_BITS / ENTRY_W;
  localparam int unsigned SLOT_W = $clog2(SLOTS), NCOL = ROW_BITS / 64, COL_W = $clog2(NCOL);
  localparam int unsigned ROW_W = $clog2(RPB);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic req_valid, req_ready, rsp_valid, rsp_hit, rsp_dup;
  pim_op_e req_op;
  logic [0:0]         req_bank;
  logic [ROW_W-1:0]   req_row;
  logic [SLOT_W-1:0]  req_slot, rsp_slot;
  logic [COL_W-1:0]   req_col;
  logic [TAG_W-1:0]   req_tag;
  logic [ENTRY_W-1:0] req_entry, rsp_entry;
  logic [63:0]        req_wdata, rsp_rdata;
  val_t               rsp_value;
  logic [31:0]        act_count, search_count;

  pim_chip #(.NUM_BANKS(NB), .ROWS_PER_BANK(RPB), .ROWS_PER_SA(RPS), .ROW_BITS(ROW_BITS),
             .TAG_W(TAG_W), .T_RP(T_RP), .T_RCD(T_RCD), .T_CL(T_CL), .T_CMP(T_CMP)) dut (.*);

  logic [ROW_BITS-1:0] shadow [NB][RPB];
  int open_row [NB];
  int checks = 0, failures = 0, n_act = 0, n_search = 0;
  int n_hitrow = 0, n_closed = 0, n_conflict = 0;

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(pim_op_e op, int b, int r, int s, int c, logic [TAG_W-1:0] t,
                     logic [ENTRY_W-1:0] e, logic [63:0] wd);
    int lat, post, exp_lat;
    logic exp_hit; int exp_slot; val_t exp_val; logic exp_dup; logic [ENTRY_W-1:0] x;
    post = (op == PIM_SEARCH) ? T_CMP : (op == PIM_RD_SLOT || op == PIM_RD_COL) ? T_CL - 1 : 0;
    if (open_row[b] == r)      begin exp_lat = 2 + post; n_hitrow++; end
    else if (open_row[b] < 0)  begin exp_lat = 2 + T_RCD + post; n_closed++; n_act++; end
    else                       begin exp_lat = 2 + T_RP + T_RCD + post; n_conflict++; n_act++; end
    if (op == PIM_SEARCH) n_search++;
    open_row[b] = r;
    @(negedge clk);
    req_valid = 1; req_op = op; req_bank = 1'(b); req_row = ROW_W'(r); req_slot = SLOT_W'(s);
    req_col = COL_W'(c); req_tag = t; req_entry = e; req_wdata = wd;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!rsp_valid);
    chk(lat == exp_lat, $sformatf("latency op %0d: %0d expected %0d", op, lat, exp_lat));
    #1;
    unique case (op)
      PIM_WR_SLOT: shadow[b][r][s*ENTRY_W +: ENTRY_W] = e;
      PIM_WR_COL:  shadow[b][r][c*64 +: 64] = wd;
      PIM_RD_SLOT: chk(rsp_entry == shadow[b][r][s*ENTRY_W +: ENTRY_W], "slot read");
      PIM_RD_COL:  chk(rsp_rdata == shadow[b][r][c*64 +: 64], "column read");
      PIM_SEARCH: begin
        exp_hit = 0; exp_slot = 0; exp_val = '0; exp_dup = 0;
        for (int i = SLOTS - 1; i >= 0; i--) begin
          x = shadow[b][r][i*ENTRY_W +: ENTRY_W];
          if (x[ENTRY_W-1] && x[VAL_W +: TAG_W] == t) begin
            exp_hit = 1; exp_slot = i; exp_val = x[VAL_W-1:0]; exp_dup = x[ENTRY_W-2];
          end
        end
        chk(rsp_hit == exp_hit && rsp_slot == SLOT_W'(exp_slot) && rsp_value == exp_val &&
            rsp_dup == exp_dup, $sformatf("search b%0d r%0d t%h hit %0b/%0b", b, r, t, rsp_hit, exp_hit));
      end
      default: ;
    endcase
  endtask

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst_n = 0; req_valid = 0; req_op = PIM_SEARCH; req_bank = 0; req_row = 0; req_slot = 0;
    req_col = 0; req_tag = 0; req_entry = 0; req_wdata = 0;
    for (int b = 0; b < NB; b++) open_row[b] = -1;
    #12 rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < RPB; r++)
        for (int c = 0; c < NCOL; c++) run(PIM_WR_COL, b, r, 0, c, '0, '0, {$urandom, $urandom});
    for (int it = 0; it < 800; it++) begin
      int op, b, r;
      op = $urandom_range(0, 9);
      b  = $urandom_range(0, NB - 1);
      r  = ($urandom_range(0, 2) == 0) ? $urandom_range(0, RPB - 1) : (open_row[b] < 0 ? 0 : open_row[b]);
      if (op <= 2)      run(PIM_WR_SLOT, b, r, $urandom_range(0, SLOTS - 1), 0, '0,
                            {1'b1, 1'($urandom), TAG_W'($urandom_range(0, 7)), VAL_W'($urandom)}, '0);
      else if (op <= 6) run(PIM_SEARCH, b, r, 0, 0, TAG_W'($urandom_range(0, 7)), '0, '0);
      else if (op == 7) run(PIM_RD_SLOT, b, r, $urandom_range(0, SLOTS - 1), 0, '0, '0, '0);
      else if (op == 8) run(PIM_RD_COL, b, r, 0, $urandom_range(0, NCOL - 1), '0, '0, '0);
      else              run(PIM_WR_COL, b, r, 0, $urandom_range(0, NCOL - 1), '0, '0, {$urandom, $urandom});
    end
    chk(act_count == 32'(n_act), $sformatf("activations %0d expected %0d", act_count, n_act));
    chk(search_count == 32'(n_search), "search count");
    chk(n_hitrow > 0 && n_closed > 0 && n_conflict > 0, "all three row states seen");
    $display("row-hit %0d closed %0d conflict %0d", n_hitrow, n_closed, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
