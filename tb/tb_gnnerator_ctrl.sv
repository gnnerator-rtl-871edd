// tb_gnnerator_ctrl: the accelerator controller against models of the two engines.
// The Graph Engine model finishes columns after random delays and, in dense-first mode,
// requests each shard load (need = max(s, c)) and waits for load_allow; the Dense Engine
// model finishes each task after a random delay. Checks:
//   graph first: the task sequence (interval c, block b, first/last, input tile,
//     partial-sum addresses) and that task k is never issued before more than k columns
//     are finished, de_stall high while a task waits;
//   dense first: one task per interval covering all input words, and load_allow equal to
//     (load_need < finished dense tasks) in every cycle a load is requested;
//   done exactly once, after both engines have finished.
module tb_gnnerator_ctrl;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  gnn_cfg_t cfg;
  logic ge_start, ge_done = 0, ge_load_req = 0, ge_load_allow;
  logic [15:0] ge_load_need = 0;
  logic [31:0] ge_col_cnt = 0;
  logic de_task_valid, de_task_ready = 1, de_task_done = 0;
  dense_task_t de_task;
  logic ge_stall, de_stall;
  always #5 clk = ~clk;

  gnnerator_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #50000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int S, NB, k_seen, de_fin_cnt, n_de_stall, n_ge_stall, n_done;
  bit ge_finished, de_running;

  // Dense Engine model
  always @(posedge clk) if (rst_n) begin
    if (de_task_valid && de_task_ready) begin
      automatic int k = k_seen;
      if (cfg.order == MODE_GRAPH_FIRST) begin
        automatic int b = k / S, c = k % S;
        chk(ge_col_cnt > 32'(k), $sformatf("task %0d issued with %0d columns", k, ge_col_cnt));
        chk(de_task.node_base == 32'(c * cfg.ge.shard_n), "node_base");
        chk(de_task.in_tile0 == 16'(b * cfg.ge.wpb / 2), "in_tile0");
        chk(de_task.in_tiles == 16'(cfg.ge.wpb / 2), "in_tiles");
        chk(de_task.in_base == cfg.ge.out_base / 2 && de_task.in_wpn == cfg.ge.wpn / 2, "input array");
        chk(de_task.first == (b == 0) && de_task.last == (b == NB - 1), "first/last");
      end else begin
        chk(de_task.node_base == 32'(k * cfg.ge.shard_n), "node_base (dense first)");
        chk(de_task.in_tile0 == 0 && de_task.in_tiles == cfg.de_in_wpn, "all input words");
        chk(de_task.first && de_task.last, "single block");
      end
      chk(de_task.node_cnt == 16'((32'((k % S + 1) * cfg.ge.shard_n) > cfg.ge.num_nodes)
                                  ? cfg.ge.num_nodes - (k % S) * cfg.ge.shard_n : cfg.ge.shard_n),
          "node_cnt");
      chk(de_task.out_base == cfg.de_out_base && de_task.w_base == cfg.de_w_base, "out/w base");
      k_seen++;
      de_task_ready <= 0;
      fork begin
        repeat ($urandom_range(3, 40)) @(posedge clk);
        de_task_done <= 1; @(posedge clk); de_task_done <= 0; de_task_ready <= 1;
      end join_none
    end
    if (de_stall) n_de_stall++;
    if (ge_stall) n_ge_stall++;
    if (done) n_done++;
    if (ge_load_req) begin
      chk(ge_load_allow == (32'(ge_load_need) < 32'(de_fin_cnt)) || cfg.order == MODE_GRAPH_FIRST,
          "load_allow rule");
      chk(ge_stall == !ge_load_allow, "ge_stall");
    end
    if (de_task_done) de_fin_cnt++;
  end

  // Graph Engine model
  task automatic ge_run();
    ge_col_cnt = 0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < S; c++) begin
      for (int s = 0; s < S; s++) begin
        if (cfg.order == MODE_DENSE_FIRST) begin
          @(negedge clk); ge_load_req = 1; ge_load_need = 16'((s > c) ? s : c);
          @(posedge clk);
          while (!ge_load_allow) @(posedge clk);
          @(negedge clk); ge_load_req = 0;
        end
        repeat ($urandom_range(2, 15)) @(negedge clk);
      end
      ge_col_cnt = ge_col_cnt + 1;
    end
    @(negedge clk); ge_done = 1; @(negedge clk); ge_done = 0;
    ge_finished = 1;
  endtask

  task automatic run(input order_e ord, input int v, input int n, input int nblk);
    cfg = '0;
    cfg.order = ord;
    cfg.ge.num_nodes = v; cfg.ge.shard_n = 16'(n); S = (v + n - 1) / n; cfg.ge.grid = 16'(S);
    cfg.ge.wpb = 2; cfg.ge.nblk = 16'(nblk); cfg.ge.wpn = 16'(2 * nblk); NB = nblk;
    cfg.ge.out_base = 1000; cfg.de_in_base = 40; cfg.de_in_wpn = 3; cfg.de_w_base = 7;
    cfg.de_out_base = 3000; cfg.de_out_tiles = 2; cfg.de_act = ACT_RELU;
    k_seen = 0; de_fin_cnt = 0; ge_finished = 0; n_done = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    chk(ge_start, "ge_start pulse");
    ge_run();
    while (!(n_done > 0)) @(negedge clk);
    repeat (5) @(negedge clk);
    chk(n_done == 1, "one done pulse");
    chk(k_seen == ((ord == MODE_GRAPH_FIRST) ? NB * S : S), $sformatf("tasks %0d", k_seen));
    chk(de_fin_cnt == k_seen && ge_finished && !busy, "both engines finished before done");
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);
    run(MODE_GRAPH_FIRST, 20, 8, 2);
    run(MODE_DENSE_FIRST, 20, 8, 2);
    run(MODE_GRAPH_FIRST, 33, 16, 3);
    run(MODE_DENSE_FIRST, 50, 8, 1);
    checks += 2;
    if (n_de_stall == 0) begin failures++; $display("no Dense Engine stall"); end
    if (n_ge_stall == 0) begin failures++; $display("no Graph Engine stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
