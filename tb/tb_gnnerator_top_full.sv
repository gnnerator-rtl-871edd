// tb_gnnerator_top_full: the end-to-end test of tb_gnnerator_top with the accelerator at
// its full default size (64 x 64 systolic array, 32 graph processing elements of 32
// lanes, full scratchpads; no parameter is overridden) on a small graph of 40 nodes in
// intervals of 16. A random graph of V nodes runs two layer stages back to back:
//   1. graph first (GCN-like): sum aggregation over N(v) and v of 128-dimension features
//      in two dimension blocks of 64, then relu(agg * W1) with W1 128 x 64. The Dense Engine
//      must wait for the aggregated columns (de_stall) and reloads partial sums between
//      the two blocks.
//   2. dense first (pooling-like): z = relu(x * W2), W2 128 x 128, then max aggregation of
//      z over N(v) and v. The Graph Engine must wait for the dense intervals (ge_stall).
// Every output word is compared with a reference computed here. The test also counts
// how often each mechanism of the design happened: consumer stalls in both directions,
// partial-sum reloads, reduce-unit conflicts and the switch between the two orders; one
// that never happened counts as a failure.
module tb_gnnerator_top_full;
  import gnn_pkg::*;
  localparam int D = 64, GL = 32;                          // hardware size (defaults)
  localparam int V = 40, NS = 16, NE = 120;                // graph size
  localparam int S = (V + NS - 1) / NS;
  localparam int FD = 128, GWPN = FD / GL, WPB = 2;       // 128 dims, 4 GE words per node
  localparam int DW = D * DATA_W, GW = GL * DATA_W;
  // Feature DRAM addresses in graph-engine words
  localparam int X_BASE = 0, AGG1_BASE = 400, Z_BASE = 800, AGG2_BASE = 1200;
  localparam int OUT1_BASE = 1600;                          // dense words
  localparam int W1_BASE = 0, W2_BASE = 200;                // weight words
  localparam int ETAB = 0, EBASE = 64;

  logic clk = 0, rst_n = 0, start = 0, busy, done, ge_stall, de_stall, arb_stall;
  gnn_cfg_t cfg;
  logic df_req_valid, df_req_ready, df_req_we, df_rsp_valid;
  logic [31:0] df_req_addr;
  logic [DW-1:0] df_req_wdata, df_rsp_rdata;
  logic w_req_valid, w_req_ready, w_rsp_valid;
  logic [31:0] w_req_addr;
  logic [DW-1:0] w_rsp_rdata;
  logic gf_req_valid, gf_req_ready, gf_req_we, gf_rsp_valid;
  logic [31:0] gf_req_addr;
  logic [GW-1:0] gf_req_wdata, gf_rsp_rdata;
  logic e_req_valid, e_req_ready, e_rsp_valid;
  logic [31:0] e_req_addr, e_rsp_rdata;
  always #5 clk = ~clk;

  gnnerator_top dut (.*);

  tb_feature_dram #(.GW(GW), .LAT(5)) u_fd (.clk, .rst_n,
    .g_req_valid(gf_req_valid), .g_req_ready(gf_req_ready), .g_req_we(gf_req_we),
    .g_req_addr(gf_req_addr), .g_req_wdata(gf_req_wdata), .g_rsp_valid(gf_rsp_valid),
    .g_rsp_rdata(gf_rsp_rdata), .d_req_valid(df_req_valid), .d_req_ready(df_req_ready),
    .d_req_we(df_req_we), .d_req_addr(df_req_addr), .d_req_wdata(df_req_wdata),
    .d_rsp_valid(df_rsp_valid), .d_rsp_rdata(df_rsp_rdata));
  tb_dram #(.W(DW), .LAT(6)) u_wd (.clk, .rst_n, .req_valid(w_req_valid), .req_ready(w_req_ready),
    .req_we(1'b0), .req_addr(w_req_addr), .req_wdata('0), .rsp_valid(w_rsp_valid), .rsp_rdata(w_rsp_rdata));
  tb_dram #(.W(32), .LAT(4), .RAND_READY(1)) u_ed (.clk, .rst_n, .req_valid(e_req_valid),
    .req_ready(e_req_ready), .req_we(1'b0), .req_addr(e_req_addr), .req_wdata('0),
    .rsp_valid(e_rsp_valid), .rsp_rdata(e_rsp_rdata));

  int checks = 0, failures = 0;
  int n_ge_stall = 0, n_de_stall = 0, n_reload = 0, n_conflict = 0, n_switch = 0;
  logic ge_stall_q = 0, de_stall_q = 0, have_prev = 0;
  order_e prev_order = MODE_GRAPH_FIRST;
  always @(posedge clk) begin
    if (ge_stall && !ge_stall_q) n_ge_stall++;
    if (de_stall && !de_stall_q) n_de_stall++;
    ge_stall_q <= ge_stall; de_stall_q <= de_stall;
    if (arb_stall) n_conflict++;
    if (int'(dut.u_de.state) == 3 && dut.u_de.dma_done) n_reload++;  // partial sums reloaded
    if (rst_n && dut.u_ctrl.ge_start) begin  // a pass starts: did the producer/consumer order change?
      if (have_prev && dut.u_ctrl.cfg_q.order != prev_order) n_switch++;
      prev_order <= dut.u_ctrl.cfg_q.order; have_prev <= 1'b1;
    end
  end

  initial begin
    #400000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int esrc [NE], edst [NE];
  elem_t X [V][FD], W1 [FD][D], W2 [FD][FD];
  elem_t AGG1 [V][FD], OUT1 [V][D], Z [V][FD], AGG2 [V][FD];

  function automatic elem_t rnd();
    return elem_t'($urandom_range(0, 14)) - 7;
  endfunction

  // write node features (FD dims) as GE words at base
  task automatic put_feat(input int base, input int v, input elem_t f [FD]);
    for (int k = 0; k < GWPN; k++) begin
      logic [GW-1:0] w;
      for (int l = 0; l < GL; l++) w[l*DATA_W +: DATA_W] = f[k*GL + l];
      u_fd.mem[base + v*GWPN + k] = w;
    end
  endtask

  task automatic build_edges();
    int off = 0;
    for (int c = 0; c < S; c++) for (int s = 0; s < S; s++) begin
      int cnt = 0;
      for (int e = 0; e < NE; e++) if (esrc[e] / NS == s && edst[e] / NS == c) begin
        edge_t ew;
        ew.src = 16'(esrc[e] % NS); ew.dst = 16'(edst[e] % NS);
        u_ed.mem[EBASE + off + cnt] = ew;
        cnt++;
      end
      u_ed.mem[ETAB + 2*(c*S + s)]     = off;
      u_ed.mem[ETAB + 2*(c*S + s) + 1] = cnt;
      off += cnt;
    end
  endtask

  // reference aggregation: a[v] = reduce over {v} and in-neighbours u of apply(h_u, h_v)
  task automatic ref_agg(input elem_t h [V][FD], input apply_op_e aop, input reduce_op_e rop,
                         output elem_t a [V][FD]);
    for (int v = 0; v < V; v++) for (int d = 0; d < FD; d++) a[v][d] = h[v][d];
    for (int e = 0; e < NE; e++) for (int d = 0; d < FD; d++)
      a[edst[e]][d] = reduce_fn(rop, a[edst[e]][d], apply_fn(aop, h[esrc[e]][d], h[edst[e]][d]));
  endtask

  function automatic elem_t ge_elem(int base, int v, int d);
    logic [GW-1:0] w = u_fd.peek(base + v*GWPN + d/GL);
    return w[(d%GL)*DATA_W +: DATA_W];
  endfunction

  task automatic check_feat(input int base, input elem_t ref_f [V][FD], input string what);
    int bad = 0;
    for (int v = 0; v < V; v++) for (int d = 0; d < FD; d++) begin
      checks++;
      if (ge_elem(base, v, d) !== ref_f[v][d]) begin
        failures++;
        if (bad++ < 5) $display("%s mismatch v=%0d d=%0d got %0d exp %0d", what, v, d,
                                ge_elem(base, v, d), ref_f[v][d]);
      end
    end
  endtask

  task automatic run(input gnn_cfg_t c, output int cycles);
    int t0;
    @(negedge clk); cfg = c; start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    cycles = t0;
  endtask

  gnn_cfg_t c1, c2;
  int cyc1, cyc2;

  initial begin
    cfg = '0;
    // random graph with two hub destinations so that reduce lanes collide
    for (int e = 0; e < NE; e++) begin
      esrc[e] = $urandom_range(0, V-1);
      edst[e] = (e % 3 == 0) ? ((e % 2) ? 5 : V-2) : $urandom_range(0, V-1);
    end
    for (int v = 0; v < V; v++) for (int d = 0; d < FD; d++) X[v][d] = rnd();
    for (int i = 0; i < FD; i++) for (int o = 0; o < D; o++) W1[i][o] = rnd();
    for (int i = 0; i < FD; i++) for (int o = 0; o < FD; o++) W2[i][o] = rnd();
    for (int v = 0; v < V; v++) put_feat(X_BASE, v, X[v]);
    for (int i = 0; i < FD; i++) begin
      logic [DW-1:0] w;
      for (int o = 0; o < D; o++) w[o*DATA_W +: DATA_W] = W1[i][o];
      u_wd.mem[W1_BASE + i] = w;
      for (int t = 0; t < FD / D; t++) begin
        for (int o = 0; o < D; o++) w[o*DATA_W +: DATA_W] = W2[i][t*D + o];
        u_wd.mem[W2_BASE + i*(FD/D) + t] = w;
      end
    end
    build_edges();

    // references
    ref_agg(X, AP_PASS_U, RD_SUM, AGG1);
    for (int v = 0; v < V; v++) for (int o = 0; o < D; o++) begin
      automatic elem_t a = 0;
      for (int i = 0; i < FD; i++) a += AGG1[v][i] * W1[i][o];
      OUT1[v][o] = (a < 0) ? 0 : a;
    end
    for (int v = 0; v < V; v++) for (int o = 0; o < FD; o++) begin
      automatic elem_t a = 0;
      for (int i = 0; i < FD; i++) a += X[v][i] * W2[i][o];
      Z[v][o] = (a < 0) ? 0 : a;
    end
    ref_agg(Z, AP_PASS_U, RD_MAX, AGG2);

    // stage 1: graph first
    c1 = '0;
    c1.order = MODE_GRAPH_FIRST;
    c1.ge.num_nodes = V; c1.ge.shard_n = NS; c1.ge.grid = S;
    c1.ge.wpn = GWPN; c1.ge.wpb = WPB; c1.ge.nblk = GWPN / WPB;
    c1.ge.in_base = X_BASE; c1.ge.out_base = AGG1_BASE;
    c1.ge.edge_tab_base = ETAB; c1.ge.edge_base = EBASE;
    c1.ge.apply_op = AP_PASS_U; c1.ge.reduce_op = RD_SUM;
    c1.de_w_base = W1_BASE; c1.de_out_base = OUT1_BASE; c1.de_out_tiles = 1; c1.de_act = ACT_RELU;
    // stage 2: dense first
    c2 = '0;
    c2.order = MODE_DENSE_FIRST;
    c2.ge = c1.ge;
    c2.ge.in_base = Z_BASE; c2.ge.out_base = AGG2_BASE; c2.ge.reduce_op = RD_MAX;
    c2.de_in_base = X_BASE / 2; c2.de_in_wpn = FD / D;
    c2.de_w_base = W2_BASE; c2.de_out_base = Z_BASE / 2; c2.de_out_tiles = FD / D;
    c2.de_act = ACT_RELU;

    repeat (3) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);

    run(c1, cyc1);
    check_feat(AGG1_BASE, AGG1, "agg1");
    for (int v = 0; v < V; v++) for (int o = 0; o < D; o++) begin
      automatic logic [DW-1:0] w = u_fd.peek(2*(OUT1_BASE + v)) | (DW'(u_fd.peek(2*(OUT1_BASE + v) + 1)) << GW);
      checks++;
      if (elem_t'(w[o*DATA_W +: DATA_W]) !== OUT1[v][o]) begin
        failures++;
        if (failures < 10) $display("out1 mismatch v=%0d o=%0d got %0d exp %0d", v, o,
                                    elem_t'(w[o*DATA_W +: DATA_W]), OUT1[v][o]);
      end
    end
    run(c2, cyc2);
    check_feat(Z_BASE, Z, "z");
    check_feat(AGG2_BASE, AGG2, "agg2");

    $display("stage cycles: graph-first %0d, dense-first %0d", cyc1, cyc2);
    $display("mechanisms: ge_stall=%0d de_stall=%0d reload=%0d conflict=%0d mode_switch=%0d",
             n_ge_stall, n_de_stall, n_reload, n_conflict, n_switch);
    checks += 5;
    if (n_ge_stall == 0) begin failures++; $display("no Graph Engine stall"); end
    if (n_de_stall == 0) begin failures++; $display("no Dense Engine stall"); end
    if (n_reload == 0)   begin failures++; $display("no partial-sum reload"); end
    if (n_conflict == 0) begin failures++; $display("no reduce conflict"); end
    if (n_switch == 0)   begin failures++; $display("no mode switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
