// match_select: encoder behind the comparators of one subarray row.
//
// Takes the comparator outputs of every slot of the open row, encodes them
// into the address (slot number) of the matched entry and selects that
// entry's value and duplicate flag. When no comparator fired it returns the
// null result: hit = 0, slot = 0, value = 0, dup = 0. The hash table holds
// only unique keys, so at most one comparator should fire; if several do,
// the lowest slot wins (this design's choice). Purely combinational: the
// PIM chip registers the result.
module match_select #(
  parameter int unsigned SLOTS  = 178,
  parameter int unsigned VAL_W  = 32,
  parameter int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic [SLOTS-1:0]            match_vec,
  input  logic [SLOTS-1:0][VAL_W-1:0] values,
  input  logic [SLOTS-1:0]            dups,
  output logic                        hit,
  output logic [SLOT_W-1:0]           slot,
  output logic [VAL_W-1:0]            value,
  output logic                        dup
);
  always_comb begin
    hit   = 1'b0;
    slot  = '0;
    value = '0;
    dup   = 1'b0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (match_vec[i]) begin
        hit   = 1'b1;
        slot  = SLOT_W'(i);
        value = values[i];
        dup   = dups[i];
      end
    end
  end
endmodule
