// gnnerator_top: the accelerator for graph neural networks.
//
// A Dense Engine (64 x 64 systolic array for the fully connected feature extraction)
// and a Graph Engine (NUM_GPE graph processing elements of LANES lanes for the
// neighbourhood aggregation) share one off-chip Feature DRAM, each through its own
// port; the Dense Engine also reads Weight DRAM and the Graph Engine reads Edge DRAM.
// The accelerator controller starts both engines and stalls the consumer until the
// producer has finished the data it needs, with either engine as producer.
// Interface: start with a gnn_cfg_t runs one aggregation pass and the matching feature
// extraction; done pulses at the end. The four DRAM ports use the valid/ready request,
// in-order response handshake of gnn_pkg; the dense port's words are 64 elements
// (2048 bits) and the graph port's 32 elements (1024 bits), both addressing the same
// memory (dense word a = graph words 2a, 2a+1). ge_stall, de_stall and arb_stall report
// the consumer stalls and reduce-unit conflicts for monitoring.
module gnnerator_top
  import gnn_pkg::*;
#(
  parameter int unsigned DE_DIM_P = 64,     // systolic array rows = columns
  parameter int unsigned DE_DEPTH = 8192,   // words per Dense Engine buffer
  parameter int unsigned NUM_GPE  = 32,
  parameter int unsigned LANES    = 32,
  parameter int unsigned EAW      = 21,
  parameter int unsigned FAW      = 13,
  localparam int unsigned DW      = DE_DIM_P * DATA_W,
  localparam int unsigned GW      = LANES * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  gnn_cfg_t          cfg,
  output logic              busy,
  output logic              done,
  output logic              ge_stall,
  output logic              de_stall,
  output logic              arb_stall,
  // Feature DRAM, Dense Engine port
  output logic              df_req_valid,
  input  logic              df_req_ready,
  output logic              df_req_we,
  output logic [ADDR_W-1:0] df_req_addr,
  output logic [DW-1:0]     df_req_wdata,
  input  logic              df_rsp_valid,
  input  logic [DW-1:0]     df_rsp_rdata,
  // Weight DRAM
  output logic              w_req_valid,
  input  logic              w_req_ready,
  output logic [ADDR_W-1:0] w_req_addr,
  input  logic              w_rsp_valid,
  input  logic [DW-1:0]     w_rsp_rdata,
  // Feature DRAM, Graph Engine port
  output logic              gf_req_valid,
  input  logic              gf_req_ready,
  output logic              gf_req_we,
  output logic [ADDR_W-1:0] gf_req_addr,
  output logic [GW-1:0]     gf_req_wdata,
  input  logic              gf_rsp_valid,
  input  logic [GW-1:0]     gf_rsp_rdata,
  // Edge DRAM
  output logic              e_req_valid,
  input  logic              e_req_ready,
  output logic [ADDR_W-1:0] e_req_addr,
  input  logic              e_rsp_valid,
  input  logic [31:0]       e_rsp_rdata
);
  logic        ge_start, ge_done, ge_busy, ge_load_req, ge_load_allow, ge_col_done;
  logic [15:0] ge_load_need;
  logic [31:0] ge_col_cnt;
  logic        de_task_valid, de_task_ready, de_task_done;
  dense_task_t de_task;

  gnnerator_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .ge_start, .ge_done, .ge_load_req, .ge_load_need, .ge_load_allow, .ge_col_cnt,
    .de_task_valid, .de_task_ready, .de_task, .de_task_done, .ge_stall, .de_stall);

  dense_engine #(.DIM(DE_DIM_P), .DEPTH(DE_DEPTH)) u_de (
    .clk, .rst_n, .task_valid(de_task_valid), .task_ready(de_task_ready),
    .task_i(de_task), .task_done(de_task_done),
    .f_req_valid(df_req_valid), .f_req_ready(df_req_ready), .f_req_we(df_req_we),
    .f_req_addr(df_req_addr), .f_req_wdata(df_req_wdata), .f_rsp_valid(df_rsp_valid),
    .f_rsp_rdata(df_rsp_rdata), .w_req_valid, .w_req_ready, .w_req_addr, .w_rsp_valid,
    .w_rsp_rdata);

  graph_engine #(.NUM_GPE(NUM_GPE), .LANES(LANES), .EAW(EAW), .FAW(FAW)) u_ge (
    .clk, .rst_n, .start(ge_start), .cfg(cfg.ge), .busy(ge_busy), .done(ge_done),
    .load_req(ge_load_req), .load_need(ge_load_need), .load_allow(ge_load_allow),
    .col_done(ge_col_done), .col_cnt(ge_col_cnt), .arb_stall,
    .f_req_valid(gf_req_valid), .f_req_ready(gf_req_ready), .f_req_we(gf_req_we),
    .f_req_addr(gf_req_addr), .f_req_wdata(gf_req_wdata), .f_rsp_valid(gf_rsp_valid),
    .f_rsp_rdata(gf_rsp_rdata), .e_req_valid, .e_req_ready, .e_req_addr, .e_rsp_valid,
    .e_rsp_rdata);
endmodule
