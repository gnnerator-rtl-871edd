// gpe: front end of one Graph Processing Element (GPE) of the Shard Compute Unit.
//
// Holds the GPE's Edge Fetcher, its two Input Feature Fetchers and its Apply Unit.
// Each cycle the edge fetcher presents one (edge, word k) item; the first Input Feature
// Fetcher reads word k of the source node's feature block from the source-feature
// scratchpad, the second reads word k of the destination node's input feature from the
// destination-input scratchpad, and the Apply Unit combines them. The result, tagged with
// the destination node and k, is registered in an output stage that the Arbiter/X-Bar
// drains towards the Reduce Unit owning the destination (res_grant). When the output
// stage is held because the arbiter chose another GPE, the edge fetcher stalls.
// Throughput: one item per cycle when not stalled; latency one cycle to the output stage.
// The unit list follows the paper's figure of the Shard Compute Unit; the register
// placement is this design's own.
module gpe
  import gnn_pkg::*;
#(
  parameter int unsigned ID      = 0,
  parameter int unsigned NUM_GPE = 32,
  parameter int unsigned LANES   = 32,
  parameter int unsigned EAW     = 21,
  parameter int unsigned FAW     = 13,
  localparam int unsigned W      = LANES * DATA_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [31:0]    edge_count,
  input  logic [7:0]     wpb,
  input  apply_op_e      apply_op,
  output logic           busy,
  // Graph Metadata Buffer read port
  output logic [EAW-1:0] meta_raddr,
  input  edge_t          meta_rdata,
  // source feature scratchpad read port
  output logic [FAW-1:0] src_raddr,
  input  logic [W-1:0]   src_rdata,
  // destination input feature scratchpad read port
  output logic [FAW-1:0] dsti_raddr,
  input  logic [W-1:0]   dsti_rdata,
  // result towards the arbiter / x-bar
  output logic           res_valid,
  output logic [15:0]    res_dst,
  output logic [7:0]     res_k,
  output logic [W-1:0]   res_vec,
  input  logic           res_grant
);
  logic        ef_valid, ef_ready, ef_busy;
  logic [15:0] ef_src, ef_dst;
  logic [7:0]  ef_k;
  logic [W-1:0] u, v, y;

  edge_fetcher #(.ID(ID), .NUM_GPE(NUM_GPE), .EAW(EAW)) u_ef (
    .clk, .rst_n, .start, .edge_count, .wpb, .busy(ef_busy),
    .meta_raddr, .meta_rdata, .out_valid(ef_valid), .out_ready(ef_ready),
    .out_src(ef_src), .out_dst(ef_dst), .out_k(ef_k));

  feature_fetcher #(.AW(FAW), .WIDTH(W)) u_iff_src (
    .node(ef_src), .k(ef_k), .wpb, .raddr(src_raddr), .rdata(src_rdata), .data(u));
  feature_fetcher #(.AW(FAW), .WIDTH(W)) u_iff_dst (
    .node(ef_dst), .k(ef_k), .wpb, .raddr(dsti_raddr), .rdata(dsti_rdata), .data(v));

  apply_unit #(.LANES(LANES)) u_apply (.op(apply_op), .u, .v, .y);

  assign ef_ready = !res_valid || res_grant;
  assign busy     = ef_busy || res_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_dst   <= '0;
      res_k     <= '0;
      res_vec   <= '0;
    end else if (ef_ready) begin
      res_valid <= ef_valid;
      res_dst   <= ef_dst;
      res_k     <= ef_k;
      res_vec   <= y;
    end
  end
endmodule
