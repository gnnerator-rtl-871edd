// graph_dram_ctrl: the Graph Engine's DRAM controller for the Feature DRAM port.
//
// Shares the Graph Engine's single Feature DRAM port between the Shard Feature Fetch
// Unit (reads) and the Shard Writeback Unit (writes). Requests are granted one per
// cycle with fixed priority to the writeback unit, so finished destination features
// leave before new ones arrive; only reads return data, so every response belongs to
// the fetch unit. The paper draws one DRAM Controller for the Graph Engine; the priority
// rule is this design's own. Combinational.
module graph_dram_ctrl
  import gnn_pkg::*;
#(
  parameter int unsigned W = 1024
) (
  // feature fetch (read master)
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_rsp_valid,
  output logic [W-1:0]      rd_rsp_rdata,
  // writeback (write master)
  input  logic              wr_req_valid,
  output logic              wr_req_ready,
  input  logic [ADDR_W-1:0] wr_req_addr,
  input  logic [W-1:0]      wr_req_wdata,
  // Feature DRAM port
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output logic              f_req_we,
  output logic [ADDR_W-1:0] f_req_addr,
  output logic [W-1:0]      f_req_wdata,
  input  logic              f_rsp_valid,
  input  logic [W-1:0]      f_rsp_rdata
);
  assign f_req_valid  = wr_req_valid || rd_req_valid;
  assign f_req_we     = wr_req_valid;
  assign f_req_addr   = wr_req_valid ? wr_req_addr : rd_req_addr;
  assign f_req_wdata  = wr_req_wdata;
  assign wr_req_ready = f_req_ready;
  assign rd_req_ready = f_req_ready && !wr_req_valid;
  assign rd_rsp_valid = f_rsp_valid;
  assign rd_rsp_rdata = f_rsp_rdata;
endmodule
