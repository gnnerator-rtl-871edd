// apply_unit: SIMD binary operation of a Graph Processing Element.
//
// Combines, lane by lane, the source node's feature word u (from the first Input
// Feature Fetcher) with the destination node's input feature word v (from the second):
// pass u, u + v, u * v or u - v, chosen by op. LANES lanes work in parallel on
// independent feature dimensions. Purely combinational. The paper states the unit
// performs binary operations in SIMD fashion; the operation set is this design's own.
module apply_unit
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  apply_op_e                op,
  input  logic [LANES*DATA_W-1:0]  u,
  input  logic [LANES*DATA_W-1:0]  v,
  output logic [LANES*DATA_W-1:0]  y
);
  always_comb begin
    for (int l = 0; l < LANES; l++)
      y[l*DATA_W +: DATA_W] = apply_fn(op, u[l*DATA_W +: DATA_W], v[l*DATA_W +: DATA_W]);
  end
endmodule
