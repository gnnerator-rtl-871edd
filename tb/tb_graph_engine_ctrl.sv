// tb_graph_engine_ctrl: the Graph Engine Controller against models of its four units
// that finish after random delays. Checks, for several grid and block sizes:
//   - edge lists are loaded in the blocked destination-major order b, c, s and each
//     shard is computed exactly once, after its load, with the edge count loaded for it;
//   - destination features are loaded exactly when a column opens (s = 0);
//   - the Shard Compute Unit reads the edge bank and the destination bank the loads wrote
//     (esel / dsel equal the opposite of the bank selects seen at load time);
//   - each column is written back once, in order, with col_done/col_cnt;
//   - load_req is raised before every shard load with load_need = max(s, c), and the
//     load waits while load_allow is low.
module tb_graph_engine_ctrl;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, load_req, load_allow = 0, col_done;
  logic [15:0] load_need;
  logic [31:0] col_cnt;
  ge_cfg_t cfg;
  logic esel, dsel;
  logic ef_start, ef_done = 0, ff_start, ff_to_dst, ff_done = 0, wb_start, wb_done = 0;
  logic sc_start, sc_done = 0;
  logic [31:0] ef_idx_addr, ef_edge_count = 0, ff_node_base, wb_node_base, sc_edge_count;
  logic [15:0] ff_node_cnt, ff_word_off, wb_node_cnt, wb_word_off;
  always #5 clk = ~clk;

  graph_engine_ctrl dut (.*);

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

  // unit models: done after a random delay
  task automatic unit_delay(ref logic d, input int lo, input int hi);
    repeat ($urandom_range(lo, hi)) @(posedge clk);
    d <= 1'b1; @(posedge clk); d <= 1'b0;
  endtask
  function automatic int cnt_of(int idx_addr); return (idx_addr * 7) % 23 + 1; endfunction

  // expected sequences
  int S, NB, exp_ef [$], exp_wb [$], n_sc, n_dst, n_wb, ef_bank [int], dst_bank [int];
  int last_ef, load_col, gate_wait;
  int stalled = 0;
  bit l_wait;

  always @(posedge clk) if (rst_n) begin
    if (ef_start) begin
      automatic int a = ef_idx_addr;
      chk(exp_ef.size() > 0 && a == exp_ef[0], $sformatf("ef order: got %0d", a));
      if (exp_ef.size() > 0) void'(exp_ef.pop_front());
      ef_bank[a] = ~esel;
      last_ef = a;
      fork unit_delay(ef_done, 1, 12); join_none
      ef_edge_count <= cnt_of(a);
    end
    if (ff_start) begin
      if (ff_to_dst) begin
        automatic int c = ff_node_base / cfg.shard_n;
        // the last edge list loaded was shard (0, c) of the column being opened
        chk(((last_ef - cfg.edge_tab_base) / 2) % S == 0, "dst load outside s = 0");
        chk(((last_ef - cfg.edge_tab_base) / 2) / S == c, "dst load of the wrong column");
        dst_bank[last_ef] = ~dsel;
        n_dst++;
      end
      fork unit_delay(ff_done, 2, 15); join_none
    end
    if (sc_start) begin
      chk(ef_bank.exists(last_ef) || n_sc > 0, "compute before any load");
      n_sc++;
      fork unit_delay(sc_done, 1, 20); join_none
    end
    if (wb_start) begin
      automatic int key = (wb_word_off / cfg.wpb) * S + wb_node_base / cfg.shard_n;
      chk(exp_wb.size() > 0 && key == exp_wb[0], $sformatf("wb order: got %0d", key));
      if (exp_wb.size() > 0) void'(exp_wb.pop_front());
      n_wb++;
      fork unit_delay(wb_done, 2, 10); join_none
    end
    if (load_req) begin
      automatic int s = ((exp_ef.size() > 0 ? exp_ef[0] : 0) - cfg.edge_tab_base) / 2 % S;
      automatic int c = ((exp_ef.size() > 0 ? exp_ef[0] : 0) - cfg.edge_tab_base) / 2 / S;
      chk(load_need == 16'((s > c) ? s : c), "load_need");
      if (!load_allow) stalled++;
    end
    load_allow <= ($urandom_range(0, 2) == 0);
  end

  // compute side: the shard computed in a step is the one loaded in the previous step;
  // check bank selects against those used when loading
  int comp_q [$];
  always @(posedge clk) if (rst_n) begin
    if (ef_start) comp_q.push_back(ef_idx_addr);
    if (sc_start && comp_q.size() > 0) begin
      automatic int a = comp_q.pop_front();
      chk(sc_edge_count == 32'(cnt_of(a)), "edge count of computed shard");
      chk(esel == ef_bank[a][0], "compute reads the edge bank the load wrote");
      if (dst_bank.exists(a - 2 * (((a - cfg.edge_tab_base) / 2) % S)))
        chk(dsel == dst_bank[a - 2 * (((a - cfg.edge_tab_base) / 2) % S)][0],
            "compute reads the destination bank the load wrote");
    end
  end

  task automatic run(input int v, input int n, input int nblk, input int wpb);
    int ncols = 0;
    cfg = '0;
    cfg.num_nodes = v; cfg.shard_n = 16'(n); S = (v + n - 1) / n; cfg.grid = 16'(S);
    cfg.wpb = 8'(wpb); cfg.nblk = 16'(nblk); cfg.wpn = 16'(nblk * wpb); cfg.edge_tab_base = 100;
    NB = nblk;
    for (int b = 0; b < NB; b++) for (int c = 0; c < S; c++) begin
      for (int s = 0; s < S; s++) exp_ef.push_back(100 + 2 * (c * S + s));
      exp_wb.push_back(b * S + c);
    end
    n_sc = 0; n_dst = 0; n_wb = 0; ef_bank.delete(); dst_bank.delete(); comp_q.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      if (col_done) ncols++;
    end
    chk(exp_ef.size() == 0, "all shards loaded");
    chk(exp_wb.size() == 0, "all columns written back");
    chk(n_sc == NB * S * S, $sformatf("computes %0d", n_sc));
    chk(n_dst == NB * S, $sformatf("dst loads %0d", n_dst));
    chk(ncols == NB * S && col_cnt == 32'(NB * S), "col_done / col_cnt");
    chk(!busy, "idle after done");
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);
    run(20, 8, 2, 2);
    run(10, 16, 1, 4);
    run(33, 8, 3, 1);
    checks++;
    if (stalled == 0) begin failures++; $display("load never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
