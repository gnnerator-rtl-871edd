// shard_feature_fetch_unit: loads a block of node features from Feature DRAM into the
// load side of a Feature Scratchpad.
//
// Feature DRAM stores node features row by row, wpn LANES-wide words per node. For the
// node_cnt nodes starting at global node node_base the unit reads the wpb words of the
// current dimension block (words word_off .. word_off+wpb-1 of each node) and writes
// them to scratchpad words 0 .. node_cnt*wpb-1, node after node. With to_dst low the
// words go to the source-feature scratchpad; with to_dst high to both the destination
// input scratchpad and the destination aggregate scratchpad, so the aggregate starts
// from the node's own feature (the node itself is part of its neighbourhood). One
// request per cycle while the port is ready; done pulses after the last response. The
// paper gives the unit's role; addressing and the self-initialised aggregate are this
// design's own.
module shard_feature_fetch_unit
  import gnn_pkg::*;
#(
  parameter int unsigned FAW = 13,
  parameter int unsigned W   = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              to_dst,
  input  logic [ADDR_W-1:0] dram_base,
  input  logic [31:0]       node_base,
  input  logic [15:0]       node_cnt,
  input  logic [15:0]       wpn,
  input  logic [15:0]       word_off,
  input  logic [7:0]        wpb,
  output logic              busy,
  output logic              done,
  // Feature DRAM port (reads)
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output logic [ADDR_W-1:0] f_req_addr,
  input  logic              f_rsp_valid,
  input  logic [W-1:0]      f_rsp_rdata,
  // scratchpad load side
  output logic              sp_we,
  output logic              sp_to_dst,
  output logic [FAW-1:0]    sp_waddr,
  output logic [W-1:0]      sp_wdata
);
  logic [31:0]       total_q, issued_q, recvd_q;
  logic [15:0]       n_q;
  logic [7:0]        k_q, wpb_q;
  logic [15:0]       wpn_q, off_q;
  logic [31:0]       nb_q;
  logic [ADDR_W-1:0] base_q;
  logic              busy_q, dst_q;

  assign busy        = busy_q;
  assign f_req_valid = busy_q && (issued_q < total_q);
  assign f_req_addr  = base_q + (nb_q + 32'(n_q)) * 32'(wpn_q) + 32'(off_q) + 32'(k_q);
  assign sp_we       = busy_q && f_rsp_valid;
  assign sp_to_dst   = dst_q;
  assign sp_waddr    = FAW'(recvd_q);
  assign sp_wdata    = f_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      total_q <= '0; issued_q <= '0; recvd_q <= '0; n_q <= '0; k_q <= '0; wpb_q <= 8'd1;
      wpn_q <= '0; off_q <= '0; nb_q <= '0; base_q <= '0; busy_q <= 1'b0; dst_q <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy_q) begin
        if (start) begin
          total_q <= 32'(node_cnt) * 32'(wpb);
          issued_q <= '0; recvd_q <= '0; n_q <= '0; k_q <= '0; wpb_q <= wpb;
          wpn_q <= wpn; off_q <= word_off; nb_q <= node_base; base_q <= dram_base;
          dst_q <= to_dst;
          if (node_cnt == 16'd0 || wpb == 8'd0) done <= 1'b1;
          else busy_q <= 1'b1;
        end
      end else begin
        if (f_req_valid && f_req_ready) begin
          issued_q <= issued_q + 1'b1;
          if (k_q + 8'd1 == wpb_q) begin
            k_q <= '0;
            n_q <= n_q + 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        if (f_rsp_valid) begin
          recvd_q <= recvd_q + 1'b1;
          if (recvd_q + 32'd1 == total_q) begin
            busy_q <= 1'b0;
            done   <= 1'b1;
          end
        end
      end
    end
  end
endmodule
