// tag_match: the tag comparators of one cache bank.
//
// Each way of an enabled bank compares its stored physical tag with the
// address tag delivered by the TLBs; a way hits when the bank took part in
// the lookup, the way is valid and the tags are equal. In VESPA a superpage
// lookup enables one bank, so only WAYS comparators switch; a base-page
// lookup enables all banks. Gating by the valid bit and the enable is this
// design's addition to the plain comparators. Purely combinational.
module tag_match #(
  parameter int unsigned WAYS  = 4,
  parameter int unsigned TAG_W = 28
) (
  input  logic             en,
  input  logic [TAG_W-1:0] tags [WAYS],
  input  logic [WAYS-1:0]  valid,
  input  logic [TAG_W-1:0] addr_tag,
  output logic [WAYS-1:0]  hit
);
  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++)
      hit[w] = en & valid[w] & (tags[w] == addr_tag);
  end
endmodule
