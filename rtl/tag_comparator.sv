// tag_comparator: compares the tag stored in one way with the tag field of
// the request address.
//
// There is one comparator per way; all k work in parallel on the tags read
// from the tag array. A way matches only if its line is valid. The
// comparators' outputs go to the way selector.
// Combinational. The paper shows the k comparators. Qualifying the match with
// the valid bit is this design's choice.
module tag_comparator #(
  parameter int unsigned TAG_W = reap_pkg::TAG_W
) (
  input  logic             valid,
  input  logic [TAG_W-1:0] stored_tag,
  input  logic [TAG_W-1:0] addr_tag,
  output logic             match
);

  assign match = valid && (stored_tag == addr_tag);

endmodule
