// tb_key_comparator: checks one comparator against direct equality on
// random and hand-picked tag pairs, with the valid bit on and off.
module tb_key_comparator;
  localparam int unsigned TAG_W = 12;
  logic             v;
  logic [TAG_W-1:0] a, b;
  logic             m;
  int checks = 0, failures = 0;

  key_comparator #(.TAG_W(TAG_W)) dut (.slot_valid(v), .slot_tag(a), .probe_tag(b), .match(m));

  task automatic check(logic vv, logic [TAG_W-1:0] aa, logic [TAG_W-1:0] bb);
    logic exp;
    v = vv; a = aa; b = bb;
    #1;
    exp = vv && (aa == bb);
    checks++;
    if (m !== exp) begin
      failures++;
      $display("FAIL v=%0b a=%h b=%h m=%0b exp=%0b", vv, aa, bb, m, exp);
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    check(1, 12'h000, 12'h000);
    check(1, 12'hFFF, 12'hFFF);
    check(0, 12'h123, 12'h123);
    check(1, 12'h123, 12'h122);
    for (int i = 0; i < TAG_W; i++) check(1, 12'h5A5, 12'h5A5 ^ (12'h1 << i));
    for (int i = 0; i < 500; i++) begin
      logic [TAG_W-1:0] x;
      x = TAG_W'($urandom);
      check(1'($urandom), x, ($urandom_range(0, 1) == 1) ? x : TAG_W'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
