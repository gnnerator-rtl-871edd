// reduce_unit: SIMD aggregation of a Graph Processing Element.
//
// Folds one incoming edge result x into the destination node's running aggregate acc,
// lane by lane: sum, max or min, chosen by op. The running aggregate is read by the
// Modified Feature Fetcher and the result is written back to the same scratchpad word
// in the same cycle, so back-to-back updates of one node need no forwarding.
// Purely combinational. The paper names the unit and its aggregation role; sum, max
// (GraphsagePool) and min as the operation set is this design's own.
module reduce_unit
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  reduce_op_e               op,
  input  logic [LANES*DATA_W-1:0]  acc,
  input  logic [LANES*DATA_W-1:0]  x,
  output logic [LANES*DATA_W-1:0]  y
);
  always_comb begin
    for (int l = 0; l < LANES; l++)
      y[l*DATA_W +: DATA_W] = reduce_fn(op, acc[l*DATA_W +: DATA_W], x[l*DATA_W +: DATA_W]);
  end
endmodule
