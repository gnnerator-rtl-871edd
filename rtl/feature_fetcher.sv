// feature_fetcher: scratchpad address generator of a Graph Processing Element.
//
// Turns edge information (a shard-local node index and the word k within the node's
// feature block) into a scratchpad word address, node * wpb + k, where wpb is the number
// of LANES-wide words per node in the current feature block, and returns the word read.
// Used three times per GPE: two Input Feature Fetchers (source feature, destination
// input feature) and the Modified Feature Fetcher (running aggregate of the
// destination). The scratchpad read is asynchronous, so the fetcher adds no cycle.
// The paper gives the fetchers' role; the address formula follows from this design's
// scratchpad layout (one node's block stored in wpb consecutive words).
module feature_fetcher #(
  parameter int unsigned AW    = 13,
  parameter int unsigned WIDTH = 1024
) (
  input  logic [15:0]      node,
  input  logic [7:0]       k,
  input  logic [7:0]       wpb,
  output logic [AW-1:0]    raddr,
  input  logic [WIDTH-1:0] rdata,
  output logic [WIDTH-1:0] data
);
  logic [23:0] a;
  assign a     = 24'(node) * 24'(wpb) + 24'(k);
  assign raddr = AW'(a);
  assign data  = rdata;
endmodule
