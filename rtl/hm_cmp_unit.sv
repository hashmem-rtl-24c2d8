// hm_cmp_unit: comparison unit of a HashMem processing element.
//
// Compares the probed key with the key field of one 64-bit key-value slot
// taken from the row buffer and reports a hit when the two are equal and the
// slot lies inside the page being probed (en). Purely combinational: the
// result is valid in the same cycle as its inputs.
//
// The paper names the comparison unit and says it performs the comparison
// (an equality test of 32-bit keys). The slot layout, key in the upper and
// value in the lower half of the 64-bit slot, and the enable input that
// masks slots outside the page, are this design's choices.
module hm_cmp_unit
  import hm_pkg::*;
(
  input  logic [KEY_W-1:0] key,    // key being probed
  input  logic [KV_W-1:0]  slot,   // {key, value} slot from the row buffer
  input  logic             en,     // slot belongs to the probed page
  output logic             hit,    // slot key equals the probed key
  output logic [VAL_W-1:0] value   // value field of the slot
);

  always_comb begin
    hit   = en && (slot[KV_W-1 -: KEY_W] == key);
    value = slot[VAL_W-1:0];
  end

endmodule
