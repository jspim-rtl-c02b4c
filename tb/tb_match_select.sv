// tb_match_select: drives random comparator vectors (none, one, several
// bits set) with random values and checks hit, slot (lowest set bit),
// value and dup against a loop-free reference.
module tb_match_select;
  localparam int unsigned SLOTS = 21, VAL_W = 32, SLOT_W = $clog2(SLOTS);
  logic [SLOTS-1:0]            mv;
  logic [SLOTS-1:0][VAL_W-1:0] vals;
  logic [SLOTS-1:0]            dups;
  logic                        hit, dup;
  logic [SLOT_W-1:0]           slot;
  logic [VAL_W-1:0]            value;
  int checks = 0, failures = 0;

  match_select #(.SLOTS(SLOTS), .VAL_W(VAL_W)) dut (
    .match_vec(mv), .values(vals), .dups(dups), .hit(hit), .slot(slot), .value(value), .dup(dup));

  task automatic run(logic [SLOTS-1:0] m);
    int first;
    mv = m;
    for (int i = 0; i < SLOTS; i++) begin
      vals[i] = $urandom;
      dups[i] = 1'($urandom);
    end
    #1;
    first = -1;
    for (int i = SLOTS - 1; i >= 0; i--) if (m[i]) first = i;
    checks++;
    if (first < 0) begin
      if (hit !== 1'b0 || slot !== '0 || value !== '0 || dup !== 1'b0) begin
        failures++;
        $display("FAIL null result expected, got hit=%0b slot=%0d value=%h", hit, slot, value);
      end
    end else if (hit !== 1'b1 || slot !== SLOT_W'(first) || value !== vals[first] || dup !== dups[first]) begin
      failures++;
      $display("FAIL m=%b hit=%0b slot=%0d exp %0d value=%h exp %h", m, hit, slot, first, value, vals[first]);
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    run('0);
    for (int i = 0; i < SLOTS; i++) run(SLOTS'(1) << i);
    for (int i = 0; i < 300; i++) run(SLOTS'({$urandom, $urandom}) & SLOTS'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
