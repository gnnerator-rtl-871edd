// tb_graph_engine: aggregation passes of the Graph Engine with 4 graph processing
// elements of 4 lanes. A random graph of V nodes in intervals of NS nodes, with two hub
// destinations, is aggregated three times with different apply/reduce operations and
// block sizes (one or two dimension blocks); the output array in Feature DRAM is
// compared with reduce over {v} and the in-neighbours u of apply(h_u, h_v) computed
// here. load_allow is withheld at random to stall the loader, and col_cnt must end at
// blocks x intervals with one col_done pulse per column.
module tb_graph_engine;
  import gnn_pkg::*;
  localparam int GL = 4, G = 4, EAW = 8, FAW = 6;
  localparam int V = 21, NS = 8, NE = 60, S = (V + NS - 1) / NS;
  localparam int FD = 16, GWPN = FD / GL, GW = GL * DATA_W;
  localparam int X_BASE = 0, OUT_BASE = 500, ETAB = 0, EBASE = 64;

  logic clk = 0, rst_n = 0, start = 0, busy, done, load_req, load_allow, col_done, arb_stall;
  logic [15:0] load_need;
  logic [31:0] col_cnt;
  ge_cfg_t cfg;
  logic f_req_valid, f_req_ready, f_req_we, f_rsp_valid;
  logic [31:0] f_req_addr;
  logic [GW-1:0] f_req_wdata, f_rsp_rdata;
  logic e_req_valid, e_req_ready, e_rsp_valid;
  logic [31:0] e_req_addr, e_rsp_rdata;
  logic d_rsp_valid;
  logic [2*GW-1:0] d_rsp_rdata;
  logic d_req_ready;
  always #5 clk = ~clk;

  graph_engine #(.NUM_GPE(G), .LANES(GL), .EAW(EAW), .FAW(FAW)) dut (.*);
  tb_feature_dram #(.GW(GW), .LAT(5)) u_fd (.clk, .rst_n,
    .g_req_valid(f_req_valid), .g_req_ready(f_req_ready), .g_req_we(f_req_we),
    .g_req_addr(f_req_addr), .g_req_wdata(f_req_wdata), .g_rsp_valid(f_rsp_valid),
    .g_rsp_rdata(f_rsp_rdata), .d_req_valid(1'b0), .d_req_ready, .d_req_we(1'b0),
    .d_req_addr('0), .d_req_wdata('0), .d_rsp_valid, .d_rsp_rdata);
  tb_dram #(.W(32), .LAT(3), .RAND_READY(1)) u_ed (.clk, .rst_n, .req_valid(e_req_valid),
    .req_ready(e_req_ready), .req_we(1'b0), .req_addr(e_req_addr), .req_wdata('0),
    .rsp_valid(e_rsp_valid), .rsp_rdata(e_rsp_rdata));

  int checks = 0, failures = 0, n_stall = 0, n_col = 0, n_conflict = 0;
  always @(posedge clk) begin
    load_allow <= ($urandom_range(0, 3) == 0);
    if (load_req && !load_allow) n_stall++;
    if (col_done) n_col++;
    if (arb_stall) n_conflict++;
  end

  initial begin
    #200000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int esrc [NE], edst [NE];
  elem_t X [V][FD], R [V][FD];

  task automatic run_pass(input apply_op_e aop, input reduce_op_e rop, input int wpb);
    int cyc = 0;
    for (int v = 0; v < V; v++) for (int d = 0; d < FD; d++) R[v][d] = X[v][d];
    for (int e = 0; e < NE; e++) for (int d = 0; d < FD; d++)
      R[edst[e]][d] = reduce_fn(rop, R[edst[e]][d], apply_fn(aop, X[esrc[e]][d], X[edst[e]][d]));
    for (int a = OUT_BASE; a < OUT_BASE + V*GWPN; a++) u_fd.mem[a] = '0;
    cfg = '0;
    cfg.num_nodes = V; cfg.shard_n = NS; cfg.grid = S; cfg.wpn = GWPN; cfg.wpb = 8'(wpb);
    cfg.nblk = 16'(GWPN / wpb); cfg.in_base = X_BASE; cfg.out_base = OUT_BASE;
    cfg.edge_tab_base = ETAB; cfg.edge_base = EBASE; cfg.apply_op = aop; cfg.reduce_op = rop;
    n_col = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("pass aop=%s rop=%s wpb=%0d: %0d cycles", aop.name(), rop.name(), wpb, cyc);
    checks += 2;
    if (col_cnt != 32'(S * GWPN / wpb)) begin
      failures++; $display("col_cnt %0d expected %0d", col_cnt, S * GWPN / wpb);
    end
    if (n_col != S * GWPN / wpb) begin failures++; $display("col_done pulses %0d", n_col); end
    for (int v = 0; v < V; v++) for (int d = 0; d < FD; d++) begin
      logic [GW-1:0] w = u_fd.peek(OUT_BASE + v*GWPN + d/GL);
      elem_t got = w[(d%GL)*DATA_W +: DATA_W];
      checks++;
      if (got !== R[v][d]) begin
        failures++;
        if (failures < 10) $display("mismatch v=%0d d=%0d got %0d exp %0d", v, d, got, R[v][d]);
      end
    end
  endtask

  initial begin
    cfg = '0;
    for (int e = 0; e < NE; e++) begin
      esrc[e] = $urandom_range(0, V-1);
      edst[e] = (e % 4 == 0) ? 3 : (e % 4 == 1) ? V-1 : $urandom_range(0, V-1);
    end
    for (int v = 0; v < V; v++) for (int d = 0; d < FD; d++) X[v][d] = elem_t'($urandom_range(0, 40)) - 20;
    for (int v = 0; v < V; v++) for (int k = 0; k < GWPN; k++) begin
      logic [GW-1:0] w;
      for (int l = 0; l < GL; l++) w[l*DATA_W +: DATA_W] = X[v][k*GL + l];
      u_fd.mem[X_BASE + v*GWPN + k] = w;
    end
    begin
      automatic int off = 0;
      for (int c = 0; c < S; c++) for (int s = 0; s < S; s++) begin
        automatic int cnt = 0;
        for (int e = 0; e < NE; e++) if (esrc[e] / NS == s && edst[e] / NS == c) begin
          edge_t ew;
          ew.src = 16'(esrc[e] % NS); ew.dst = 16'(edst[e] % NS);
          u_ed.mem[EBASE + off + cnt] = ew;
          cnt++;
        end
        u_ed.mem[ETAB + 2*(c*S + s)] = off; u_ed.mem[ETAB + 2*(c*S + s) + 1] = cnt;
        off += cnt;
      end
    end
    repeat (3) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);
    run_pass(AP_PASS_U, RD_SUM, 2);
    run_pass(AP_ADD, RD_MAX, 4);
    run_pass(AP_MUL, RD_MIN, 2);
    $display("loader stall cycles %0d, reduce conflicts %0d", n_stall, n_conflict);
    checks += 2;
    if (n_stall == 0) begin failures++; $display("loader never stalled"); end
    if (n_conflict == 0) begin failures++; $display("no reduce conflict"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
