// edge_fetcher: steps one Graph Processing Element through its edges of a shard.
//
// GPE number ID of NUM_GPE handles edges ID, ID + NUM_GPE, ID + 2*NUM_GPE, ... of the
// shard's edge list in the Graph Metadata Buffer (an interleaved split; the paper says
// only that each GPE is assigned a subset of the edges). For each edge it emits wpb
// items, one per LANES-wide word k of the feature block, carrying the edge's local
// source and destination. The buffer read is asynchronous: the item for the current
// edge and word is valid in the cycle it is presented and advances when out_ready is
// high, so one item per cycle is issued without stalls. start (one cycle, while idle)
// begins a shard of edge_count edges; busy falls when all items have been taken.
module edge_fetcher
  import gnn_pkg::*;
#(
  parameter int unsigned ID      = 0,
  parameter int unsigned NUM_GPE = 32,
  parameter int unsigned EAW     = 21
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [31:0]    edge_count,
  input  logic [7:0]     wpb,
  output logic           busy,
  output logic [EAW-1:0] meta_raddr,
  input  edge_t          meta_rdata,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [15:0]    out_src,
  output logic [15:0]    out_dst,
  output logic [7:0]     out_k
);
  logic [31:0] e_q, cnt_q;
  logic [7:0]  k_q, wpb_q;

  assign busy       = (e_q < cnt_q);
  assign out_valid  = busy;
  assign meta_raddr = EAW'(e_q);
  assign out_src    = meta_rdata.src;
  assign out_dst    = meta_rdata.dst;
  assign out_k      = k_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_q <= '0; cnt_q <= '0; k_q <= '0; wpb_q <= 8'd1;
    end else if (start && !busy) begin
      e_q <= 32'(ID); cnt_q <= edge_count; k_q <= '0; wpb_q <= wpb;
    end else if (out_valid && out_ready) begin
      if (k_q + 8'd1 == wpb_q) begin
        k_q <= '0;
        e_q <= e_q + 32'(NUM_GPE);
      end else begin
        k_q <= k_q + 8'd1;
      end
    end
  end
endmodule
