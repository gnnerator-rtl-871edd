// gnnerator_ctrl: the accelerator controller that coordinates the Dense Engine and the
// Graph Engine and lets either one be the producer.
//
// On start it starts the Graph Engine's aggregation pass and generates the Dense
// Engine's tasks, then stalls whichever engine is the consumer:
//   graph first (cfg.order = MODE_GRAPH_FIRST): aggregation feeds feature extraction.
//     Dense task k covers dimension block b = k / S of destination interval c = k mod S
//     (S = grid), reading the aggregated block the Graph Engine wrote at ge.out_base and
//     accumulating W[block rows] products into de_out_base (partial sums reloaded for
//     b > 0, activation after the last block). Task k is held until the Graph Engine has
//     written back more than k columns (de_stall high while held).
//   dense first (MODE_DENSE_FIRST): feature extraction feeds aggregation. Dense task s
//     computes all input blocks of source interval s into de_out_base; the Graph Engine
//     reads that array (ge.in_base must point at it) and is held before loading a shard
//     until the Dense Engine has finished every interval the load reads (ge_stall high
//     while held).
// done pulses when both engines have finished. Dense-engine words are DE_DIM elements,
// two Graph Engine words; a Graph Engine block must be a whole number of Dense Engine
// words (wpb even). The two stall rules are the paper's; task generation, word sizes and
// the counters used for the stall decisions are this design's own.
module gnnerator_ctrl
  import gnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  gnn_cfg_t    cfg,
  output logic        busy,
  output logic        done,
  // Graph Engine
  output logic        ge_start,
  input  logic        ge_done,
  input  logic        ge_load_req,
  input  logic [15:0] ge_load_need,
  output logic        ge_load_allow,
  input  logic [31:0] ge_col_cnt,
  // Dense Engine
  output logic        de_task_valid,
  input  logic        de_task_ready,
  output dense_task_t de_task,
  input  logic        de_task_done,
  // status
  output logic        ge_stall,
  output logic        de_stall
);
  gnn_cfg_t    cfg_q;
  logic        running, ge_fin, de_fin, de_inflight;
  logic [31:0] k_q, ntasks, de_cnt;   // tasks issued, tasks in total, tasks finished
  logic [15:0] tb_q, tc_q;            // block and interval of task k
  logic        gate_ok;

  function automatic logic [15:0] icnt(logic [15:0] i, logic [15:0] n, logic [31:0] v);
    logic [31:0] b;
    b = 32'(i) * 32'(n);
    if (b >= v) return 16'd0;
    if (v - b < 32'(n)) return 16'(v - b);
    return n;
  endfunction

  assign busy = running;

  // task fields
  always_comb begin
    de_task           = '0;
    de_task.node_base = 32'(tc_q) * 32'(cfg_q.ge.shard_n);
    de_task.node_cnt  = icnt(tc_q, cfg_q.ge.shard_n, cfg_q.ge.num_nodes);
    de_task.w_base    = cfg_q.de_w_base;
    de_task.out_base  = cfg_q.de_out_base;
    de_task.out_tiles = cfg_q.de_out_tiles;
    de_task.act       = cfg_q.de_act;
    if (cfg_q.order == MODE_GRAPH_FIRST) begin
      de_task.in_base  = cfg_q.ge.out_base >> 1;
      de_task.in_wpn   = cfg_q.ge.wpn >> 1;
      de_task.in_tile0 = 16'(32'(tb_q) * 32'(cfg_q.ge.wpb >> 1));
      de_task.in_tiles = 16'(cfg_q.ge.wpb >> 1);
      de_task.first    = (tb_q == 16'd0);
      de_task.last     = (tb_q + 16'd1 == cfg_q.ge.nblk);
    end else begin
      de_task.in_base  = cfg_q.de_in_base;
      de_task.in_wpn   = cfg_q.de_in_wpn;
      de_task.in_tile0 = '0;
      de_task.in_tiles = cfg_q.de_in_wpn;
      de_task.first    = 1'b1;
      de_task.last     = 1'b1;
    end
  end

  // graph first: task k needs k+1 finished columns
  assign gate_ok       = (cfg_q.order == MODE_DENSE_FIRST) || (ge_col_cnt > k_q);
  assign de_task_valid = running && !de_fin && !de_inflight && (k_q < ntasks) && gate_ok;
  assign de_stall      = running && !de_fin && !de_inflight && (k_q < ntasks) && !gate_ok;
  // dense first: a load may read intervals 0 .. de_cnt-1
  assign ge_load_allow = (cfg_q.order == MODE_GRAPH_FIRST) || (32'(ge_load_need) < de_cnt);
  assign ge_stall      = running && ge_load_req && !ge_load_allow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0; running <= 1'b0; ge_fin <= 1'b0; de_fin <= 1'b0; de_inflight <= 1'b0;
      k_q <= '0; ntasks <= '0; de_cnt <= '0; tb_q <= '0; tc_q <= '0;
      ge_start <= 1'b0; done <= 1'b0;
    end else begin
      ge_start <= 1'b0;
      done     <= 1'b0;
      if (!running) begin
        if (start) begin
          cfg_q   <= cfg;
          running <= 1'b1;
          ge_fin  <= 1'b0;
          de_fin  <= 1'b0;
          de_inflight <= 1'b0;
          k_q <= '0; de_cnt <= '0; tb_q <= '0; tc_q <= '0;
          ntasks  <= (cfg.order == MODE_GRAPH_FIRST) ? 32'(cfg.ge.nblk) * 32'(cfg.ge.grid)
                                                     : 32'(cfg.ge.grid);
          ge_start <= 1'b1;
        end
      end else begin
        if (de_task_valid && de_task_ready) begin
          de_inflight <= 1'b1;
          k_q <= k_q + 1'b1;
          if (tc_q + 16'd1 < cfg_q.ge.grid) begin
            tc_q <= tc_q + 1'b1;
          end else begin
            tc_q <= '0;
            tb_q <= tb_q + 1'b1;
          end
        end
        if (de_task_done) begin
          de_inflight <= 1'b0;
          de_cnt <= de_cnt + 1'b1;
          if (de_cnt + 32'd1 == ntasks) de_fin <= 1'b1;
        end
        if (ntasks == 32'd0) de_fin <= 1'b1;
        if (ge_done) ge_fin <= 1'b1;
        if ((ge_fin || ge_done) && de_fin) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
