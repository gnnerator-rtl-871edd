// shard_writeback_unit: stores the aggregated destination features of a finished
// column of the shard grid from the load/store side of the destination aggregate
// scratchpad to Feature DRAM.
//
// Mirror of the feature fetch: scratchpad word n*wpb + k goes to DRAM word
// dram_base + (node_base + n)*wpn + word_off + k, for n < node_cnt and k < wpb. The
// scratchpad read is asynchronous, so one write is issued per cycle while the port is
// ready; done pulses when the last write has been accepted. The paper gives the unit's
// role; the addressing is this design's own and matches the feature fetch layout.
module shard_writeback_unit
  import gnn_pkg::*;
#(
  parameter int unsigned FAW = 13,
  parameter int unsigned W   = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] dram_base,
  input  logic [31:0]       node_base,
  input  logic [15:0]       node_cnt,
  input  logic [15:0]       wpn,
  input  logic [15:0]       word_off,
  input  logic [7:0]        wpb,
  output logic              busy,
  output logic              done,
  // scratchpad store side
  output logic [FAW-1:0]    sp_raddr,
  input  logic [W-1:0]      sp_rdata,
  // Feature DRAM port (writes)
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output logic [ADDR_W-1:0] f_req_addr,
  output logic [W-1:0]      f_req_wdata
);
  logic [31:0]       total_q, issued_q;
  logic [15:0]       n_q;
  logic [7:0]        k_q, wpb_q;
  logic [15:0]       wpn_q, off_q;
  logic [31:0]       nb_q;
  logic [ADDR_W-1:0] base_q;
  logic              busy_q;

  assign busy        = busy_q;
  assign f_req_valid = busy_q;
  assign f_req_addr  = base_q + (nb_q + 32'(n_q)) * 32'(wpn_q) + 32'(off_q) + 32'(k_q);
  assign sp_raddr    = FAW'(issued_q);
  assign f_req_wdata = sp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      total_q <= '0; issued_q <= '0; n_q <= '0; k_q <= '0; wpb_q <= 8'd1;
      wpn_q <= '0; off_q <= '0; nb_q <= '0; base_q <= '0; busy_q <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy_q) begin
        if (start) begin
          total_q <= 32'(node_cnt) * 32'(wpb);
          issued_q <= '0; n_q <= '0; k_q <= '0; wpb_q <= wpb;
          wpn_q <= wpn; off_q <= word_off; nb_q <= node_base; base_q <= dram_base;
          if (node_cnt == 16'd0 || wpb == 8'd0) done <= 1'b1;
          else busy_q <= 1'b1;
        end
      end else if (f_req_ready) begin
        issued_q <= issued_q + 1'b1;
        if (k_q + 8'd1 == wpb_q) begin
          k_q <= '0;
          n_q <= n_q + 1'b1;
        end else begin
          k_q <= k_q + 1'b1;
        end
        if (issued_q + 32'd1 == total_q) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
