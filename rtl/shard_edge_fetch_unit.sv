// shard_edge_fetch_unit: loads one shard's edge list from Edge DRAM into the load side
// of the Graph Metadata Buffer.
//
// Edge DRAM holds a shard table and the edge lists. Entry i of the table is two 32-bit
// words at idx_addr = table base + 2*i: the shard's first edge (offset from edge_base)
// and its edge count. Edge words are edge_t {src, dst}, local to the shard, one per
// 32-bit DRAM word, so no memory bandwidth is spent on padding. On start the unit reads
// the table entry, then streams the count edges (one request per cycle while the port
// is ready, responses in order) into buffer words 0..count-1. done pulses when the last
// edge is written; edge_count holds the count for the Shard Compute Unit. The paper
// gives the unit's role and the edge-sized memory width; the table format is this
// design's own.
module shard_edge_fetch_unit
  import gnn_pkg::*;
#(
  parameter int unsigned EAW = 21
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] idx_addr,
  input  logic [ADDR_W-1:0] edge_base,
  output logic              busy,
  output logic              done,
  output logic [31:0]       edge_count,
  // Edge DRAM port (read only)
  output logic              e_req_valid,
  input  logic              e_req_ready,
  output logic [ADDR_W-1:0] e_req_addr,
  input  logic              e_rsp_valid,
  input  logic [31:0]       e_rsp_rdata,
  // Graph Metadata Buffer, load side
  output logic              m_we,
  output logic [EAW-1:0]    m_waddr,
  output edge_t             m_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_IDX, S_EDGES} state_e;
  state_e state;
  logic [31:0] issued_q, recvd_q, offset_q;
  logic [ADDR_W-1:0] base_q;

  assign busy = (state != S_IDLE);

  always_comb begin
    e_req_valid = 1'b0;
    e_req_addr  = '0;
    if (state == S_IDX && issued_q < 32'd2) begin
      e_req_valid = 1'b1;
      e_req_addr  = base_q + issued_q;
    end else if (state == S_EDGES && issued_q < edge_count) begin
      e_req_valid = 1'b1;
      e_req_addr  = base_q + offset_q + issued_q;
    end
  end

  assign m_we    = (state == S_EDGES) && e_rsp_valid;
  assign m_waddr = EAW'(recvd_q);
  assign m_wdata = edge_t'(e_rsp_rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; issued_q <= '0; recvd_q <= '0; offset_q <= '0; base_q <= '0;
      edge_count <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (e_req_valid && e_req_ready) issued_q <= issued_q + 1'b1;
      if (e_rsp_valid && state != S_IDLE) recvd_q <= recvd_q + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_IDX; issued_q <= '0; recvd_q <= '0; base_q <= idx_addr;
        end
        S_IDX: if (e_rsp_valid) begin
          if (recvd_q == 32'd0) begin
            offset_q <= e_rsp_rdata;
          end else begin
            edge_count <= e_rsp_rdata;
            issued_q <= '0; recvd_q <= '0; base_q <= edge_base;
            if (e_rsp_rdata == 32'd0) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              state <= S_EDGES;
            end
          end
        end
        default: if (e_rsp_valid && recvd_q + 32'd1 == edge_count) begin // S_EDGES
          state <= S_IDLE; done <= 1'b1;
        end
      endcase
    end
  end
endmodule
