// key_comparator: one subarray-level comparator.
//
// One comparator sits behind the row buffer for every hash-table slot of
// the row. It is wired to the stored key bits of its slot and to the
// reference (probe) key bits broadcast by the RLU, and outputs 1 when they
// are equal, 0 otherwise. This follows the paper's comparator; gating the
// match with the slot's valid bit, so that an empty slot never matches, is
// this design's own addition. Purely combinational.
module key_comparator #(
  parameter int unsigned TAG_W = 12
) (
  input  logic             slot_valid,
  input  logic [TAG_W-1:0] slot_tag,
  input  logic [TAG_W-1:0] probe_tag,
  output logic             match
);
  always_comb match = slot_valid && (slot_tag == probe_tag);
endmodule
