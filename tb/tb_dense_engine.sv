// tb_dense_engine: feature extraction on an 8 x 8 array. Runs a layer of 20 nodes with
// 32 input dimensions (4 words) and 16 output dimensions (2 words) as two dimension
// blocks of 2 words each, so partial sums are stored, reloaded and finished with ReLU;
// compares Feature DRAM with relu(X * W) computed here. A second run without blocking
// (one task covering all input words) must give the same result.
module tb_dense_engine;
  import gnn_pkg::*;
  localparam int D = 8, N = 20, IW = 4, OW = 2, W = D * DATA_W;
  localparam int IN_BASE = 100, OUT_BASE = 1000, OUT2_BASE = 3000, W_BASE = 0;
  logic clk = 0, rst_n = 0;
  logic task_valid = 0, task_ready, task_done;
  dense_task_t task_i;
  logic f_req_valid, f_req_ready, f_req_we, f_rsp_valid, w_req_valid, w_req_ready, w_rsp_valid;
  logic [31:0] f_req_addr, w_req_addr;
  logic [W-1:0] f_req_wdata, f_rsp_rdata, w_rsp_rdata;
  int checks = 0, failures = 0, reloads = 0;
  elem_t X [N][IW*D], Wm [IW*D][OW*D];
  always #5 clk = ~clk;

  dense_engine #(.DIM(D), .DEPTH(64)) dut (.*);
  tb_dram #(.W(W), .LAT(4), .RAND_READY(1)) u_f (.clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready),
    .req_we(f_req_we), .req_addr(f_req_addr), .req_wdata(f_req_wdata), .rsp_valid(f_rsp_valid), .rsp_rdata(f_rsp_rdata));
  tb_dram #(.W(W), .LAT(6)) u_w (.clk, .rst_n, .req_valid(w_req_valid), .req_ready(w_req_ready),
    .req_we(1'b0), .req_addr(w_req_addr), .req_wdata('0), .rsp_valid(w_rsp_valid), .rsp_rdata(w_rsp_rdata));

  always @(posedge clk) if (int'(dut.state) == 3 && dut.dma_done) reloads++;  // S_LOAD_P finished

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input int base_node, input int cnt, input int tile0, input int tiles,
                       input bit first, input bit last, input int out_base);
    task_i = '0;
    task_i.node_base = base_node; task_i.node_cnt = 16'(cnt);
    task_i.in_base = IN_BASE; task_i.in_wpn = IW; task_i.in_tile0 = 16'(tile0); task_i.in_tiles = 16'(tiles);
    task_i.w_base = W_BASE; task_i.out_base = out_base; task_i.out_tiles = OW;
    task_i.first = first; task_i.last = last; task_i.act = ACT_RELU;
    @(negedge clk); while (!task_ready) @(negedge clk);
    task_valid = 1; @(negedge clk); task_valid = 0;
    while (!task_done) @(negedge clk);
  endtask

  task automatic check(input int out_base);
    for (int n = 0; n < N; n++) for (int o = 0; o < OW*D; o++) begin
      automatic elem_t e = 0;
      automatic logic [W-1:0] wd = u_f.peek(out_base + n*OW + o/D);
      for (int i = 0; i < IW*D; i++) e += X[n][i] * Wm[i][o];
      if (e < 0) e = 0;
      checks++;
      if (elem_t'(wd[(o%D)*DATA_W +: DATA_W]) !== e) begin
        failures++; $display("node %0d dim %0d got %0d exp %0d", n, o, elem_t'(wd[(o%D)*DATA_W +: DATA_W]), e);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < N; n++) for (int i = 0; i < IW*D; i++) X[n][i] = elem_t'($urandom_range(0, 40)) - 20;
    for (int i = 0; i < IW*D; i++) for (int o = 0; o < OW*D; o++) Wm[i][o] = elem_t'($urandom_range(0, 40)) - 20;
    for (int n = 0; n < N; n++) for (int w = 0; w < IW; w++) begin
      automatic logic [W-1:0] v;
      for (int l = 0; l < D; l++) v[l*DATA_W +: DATA_W] = X[n][w*D+l];
      u_f.mem[IN_BASE + n*IW + w] = v;
    end
    for (int i = 0; i < IW*D; i++) for (int t = 0; t < OW; t++) begin
      automatic logic [W-1:0] v;
      for (int l = 0; l < D; l++) v[l*DATA_W +: DATA_W] = Wm[i][t*D+l];
      u_w.mem[W_BASE + i*OW + t] = v;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // blocked: nodes in two groups, two blocks of two words
    issue(0, 12, 0, 2, 1, 0, OUT_BASE);
    issue(12, 8, 0, 2, 1, 0, OUT_BASE);
    issue(0, 12, 2, 2, 0, 1, OUT_BASE);
    issue(12, 8, 2, 2, 0, 1, OUT_BASE);
    check(OUT_BASE);
    // unblocked
    issue(0, 20, 0, 4, 1, 1, OUT2_BASE);
    check(OUT2_BASE);
    checks++; if (reloads == 0) begin failures++; $display("no partial-sum reload seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
