// range_clamp: truncation of a layer output to the next layer's domain.
//
// The next layer can only interpolate values strictly inside [LO, HI]. A
// value below LO is replaced by LO + 1 and a value at or above HI by HI - 1
// (one integer step, the smallest offset), so that model accuracy degrades
// gracefully instead of indexing past the node table. Frequent truncation
// means the damping or the domain is badly chosen; lo_hit and hi_hit let the
// surrounding logic count it. Treating v == HI as out of range is this
// design's choice: HI itself has no right-hand neighbour node.
// Purely combinational.
module range_clamp
  import kan_pkg::*;
#(
  parameter val_t LO = 0,
  parameter val_t HI = 20480
) (
  input  val_t v,
  output val_t q,
  output logic lo_hit,
  output logic hi_hit
);
  always_comb begin
    lo_hit = (v < LO);
    hi_hit = (v >= HI);
    if (lo_hit)      q = LO + 1;
    else if (hi_hit) q = HI - 1;
    else             q = v;
  end
endmodule
