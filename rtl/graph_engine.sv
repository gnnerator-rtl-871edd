// graph_engine: the Graph Engine, which performs the sparse, irregular aggregation.
//
// Made of the Graph Engine Controller, the Shard Edge Fetch, Shard Feature Fetch, Shard
// Compute and Shard Writeback Units, a DRAM controller for the Feature DRAM port and
// four double-buffered scratchpads:
//   metadata  Graph Metadata Buffer, 2 x 2^EAW edges of 32 bits (16 MiB by default)
//   src       source features of the current shard, 2 x 2^FAW words
//   dsti      input features of the current destination interval, 2 x 2^FAW words
//   acc       running aggregates of the current destination interval, 2 x 2^FAW words
// A feature word is LANES elements of 32 bits (128 B); with FAW = 13 each feature bank
// holds 1 MiB, e.g. 4096 nodes of a 64-dimension block, so the on-chip total is 22 MiB
// of the 24 MiB the paper gives the Graph Engine. start with a ge_cfg_t runs one
// aggregation pass over all blocks and shards and writes the aggregated features to
// Feature DRAM at cfg.out_base, in the same layout as the input. Ports towards the
// accelerator controller: load_req/load_need/load_allow stall the loading of shard
// features (dense-first mode); col_done/col_cnt report finished destination columns
// (graph-first mode). Memory sizes and their split are this design's choice.
module graph_engine
  import gnn_pkg::*;
#(
  parameter int unsigned NUM_GPE = 32,
  parameter int unsigned LANES   = 32,
  parameter int unsigned EAW     = 21,
  parameter int unsigned FAW     = 13,
  localparam int unsigned W      = LANES * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  ge_cfg_t           cfg,
  output logic              busy,
  output logic              done,
  output logic              load_req,
  output logic [15:0]       load_need,
  input  logic              load_allow,
  output logic              col_done,
  output logic [31:0]       col_cnt,
  output logic              arb_stall,
  // Feature DRAM port
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output logic              f_req_we,
  output logic [ADDR_W-1:0] f_req_addr,
  output logic [W-1:0]      f_req_wdata,
  input  logic              f_rsp_valid,
  input  logic [W-1:0]      f_rsp_rdata,
  // Edge DRAM port (read only)
  output logic              e_req_valid,
  input  logic              e_req_ready,
  output logic [ADDR_W-1:0] e_req_addr,
  input  logic              e_rsp_valid,
  input  logic [31:0]       e_rsp_rdata
);
  logic esel, dsel;
  logic ef_start, ef_done, ff_start, ff_to_dst, ff_done, wb_start, wb_done, sc_start, sc_done;
  logic [ADDR_W-1:0] ef_idx_addr;
  logic [31:0] ef_edge_count, ff_node_base, wb_node_base, sc_edge_count;
  logic [15:0] ff_node_cnt, ff_word_off, wb_node_cnt, wb_word_off;
  logic ef_busy, ff_busy, wb_busy, sc_busy;
  ge_cfg_t cfg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cfg_q <= '0;
    else if (start) cfg_q <= cfg;
  end

  graph_engine_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .load_req, .load_need, .load_allow, .col_done, .col_cnt, .esel, .dsel,
    .ef_start, .ef_idx_addr, .ef_done, .ef_edge_count,
    .ff_start, .ff_to_dst, .ff_node_base, .ff_node_cnt, .ff_word_off, .ff_done,
    .wb_start, .wb_node_base, .wb_node_cnt, .wb_word_off, .wb_done,
    .sc_start, .sc_edge_count, .sc_done);

  // ---------------- scratchpads ----------------
  logic [EAW-1:0] meta_raddr [NUM_GPE];
  edge_t          meta_rdata [NUM_GPE];
  logic [31:0]    meta_rraw  [NUM_GPE];
  logic [FAW-1:0] src_raddr [NUM_GPE], dsti_raddr [NUM_GPE], acc_raddr [NUM_GPE];
  logic [W-1:0]   src_rdata [NUM_GPE], dsti_rdata [NUM_GPE], acc_rdata [NUM_GPE];
  logic           acc_we    [NUM_GPE];
  logic [FAW-1:0] acc_waddr [NUM_GPE];
  logic [W-1:0]   acc_wdata [NUM_GPE];

  logic           m_we;
  logic [EAW-1:0] m_waddr;
  edge_t          m_wdata;
  logic           sp_we, sp_to_dst;
  logic [FAW-1:0] sp_waddr, wb_raddr;
  logic [W-1:0]   sp_wdata, wb_rdata, unused_src_d, unused_dsti_d;
  logic [31:0]    unused_meta_d;

  // compute-side write ports that only the acc scratchpad uses
  logic           no_we    [1];
  logic [EAW-1:0] no_waddr_e [1];
  logic [FAW-1:0] no_waddr_f [1];
  logic [31:0]    no_wdata_e [1];
  logic [W-1:0]   no_wdata_f [1];
  assign no_we[0] = 1'b0;
  assign no_waddr_e[0] = '0;
  assign no_waddr_f[0] = '0;
  assign no_wdata_e[0] = '0;
  assign no_wdata_f[0] = '0;

  for (genvar g = 0; g < NUM_GPE; g++) begin : g_meta
    assign meta_rdata[g] = edge_t'(meta_rraw[g]);
  end

  pingpong_ram #(.DEPTH(1 << EAW), .WIDTH(32), .NR(NUM_GPE), .NW(1)) u_metadata (
    .clk, .sel(esel), .c_raddr(meta_raddr), .c_rdata(meta_rraw),
    .c_we(no_we), .c_waddr(no_waddr_e), .c_wdata(no_wdata_e),
    .d_raddr('0), .d_rdata(unused_meta_d), .d_we(m_we), .d_waddr(m_waddr), .d_wdata(m_wdata));

  pingpong_ram #(.DEPTH(1 << FAW), .WIDTH(W), .NR(NUM_GPE), .NW(1)) u_src (
    .clk, .sel(esel), .c_raddr(src_raddr), .c_rdata(src_rdata),
    .c_we(no_we), .c_waddr(no_waddr_f), .c_wdata(no_wdata_f),
    .d_raddr('0), .d_rdata(unused_src_d),
    .d_we(sp_we && !sp_to_dst), .d_waddr(sp_waddr), .d_wdata(sp_wdata));

  pingpong_ram #(.DEPTH(1 << FAW), .WIDTH(W), .NR(NUM_GPE), .NW(1)) u_dsti (
    .clk, .sel(dsel), .c_raddr(dsti_raddr), .c_rdata(dsti_rdata),
    .c_we(no_we), .c_waddr(no_waddr_f), .c_wdata(no_wdata_f),
    .d_raddr('0), .d_rdata(unused_dsti_d),
    .d_we(sp_we && sp_to_dst), .d_waddr(sp_waddr), .d_wdata(sp_wdata));

  pingpong_ram #(.DEPTH(1 << FAW), .WIDTH(W), .NR(NUM_GPE), .NW(NUM_GPE)) u_acc (
    .clk, .sel(dsel), .c_raddr(acc_raddr), .c_rdata(acc_rdata),
    .c_we(acc_we), .c_waddr(acc_waddr), .c_wdata(acc_wdata),
    .d_raddr(wb_raddr), .d_rdata(wb_rdata),
    .d_we(sp_we && sp_to_dst), .d_waddr(sp_waddr), .d_wdata(sp_wdata));

  // ---------------- units ----------------
  logic              rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] rd_req_addr, wr_req_addr;
  logic [W-1:0]      rd_rsp_rdata, wr_req_wdata;
  logic              wr_req_valid, wr_req_ready;

  shard_edge_fetch_unit #(.EAW(EAW)) u_sefu (
    .clk, .rst_n, .start(ef_start), .idx_addr(ef_idx_addr), .edge_base(cfg_q.edge_base),
    .busy(ef_busy), .done(ef_done), .edge_count(ef_edge_count),
    .e_req_valid, .e_req_ready, .e_req_addr, .e_rsp_valid, .e_rsp_rdata,
    .m_we, .m_waddr, .m_wdata);

  shard_feature_fetch_unit #(.FAW(FAW), .W(W)) u_sffu (
    .clk, .rst_n, .start(ff_start), .to_dst(ff_to_dst), .dram_base(cfg_q.in_base),
    .node_base(ff_node_base), .node_cnt(ff_node_cnt), .wpn(cfg_q.wpn),
    .word_off(ff_word_off), .wpb(cfg_q.wpb), .busy(ff_busy), .done(ff_done),
    .f_req_valid(rd_req_valid), .f_req_ready(rd_req_ready), .f_req_addr(rd_req_addr),
    .f_rsp_valid(rd_rsp_valid), .f_rsp_rdata(rd_rsp_rdata),
    .sp_we, .sp_to_dst, .sp_waddr, .sp_wdata);

  shard_writeback_unit #(.FAW(FAW), .W(W)) u_swbu (
    .clk, .rst_n, .start(wb_start), .dram_base(cfg_q.out_base),
    .node_base(wb_node_base), .node_cnt(wb_node_cnt), .wpn(cfg_q.wpn),
    .word_off(wb_word_off), .wpb(cfg_q.wpb), .busy(wb_busy), .done(wb_done),
    .sp_raddr(wb_raddr), .sp_rdata(wb_rdata),
    .f_req_valid(wr_req_valid), .f_req_ready(wr_req_ready), .f_req_addr(wr_req_addr),
    .f_req_wdata(wr_req_wdata));

  graph_dram_ctrl #(.W(W)) u_dram (
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_rdata,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_wdata,
    .f_req_valid, .f_req_ready, .f_req_we, .f_req_addr, .f_req_wdata,
    .f_rsp_valid, .f_rsp_rdata);

  shard_compute_unit #(.NUM_GPE(NUM_GPE), .LANES(LANES), .EAW(EAW), .FAW(FAW)) u_scu (
    .clk, .rst_n, .start(sc_start), .edge_count(sc_edge_count), .wpb(cfg_q.wpb),
    .apply_op(cfg_q.apply_op), .reduce_op(cfg_q.reduce_op),
    .busy(sc_busy), .done(sc_done), .arb_stall,
    .meta_raddr, .meta_rdata, .src_raddr, .src_rdata, .dsti_raddr, .dsti_rdata,
    .acc_raddr, .acc_rdata, .acc_we, .acc_waddr, .acc_wdata);

  // the load side never runs two units on one scratchpad at once
  a_one_loader: assert property (@(posedge clk) disable iff (!rst_n)
    !(ff_busy && wb_busy));
endmodule
