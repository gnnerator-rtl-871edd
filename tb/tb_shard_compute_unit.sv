// tb_shard_compute_unit: 4 GPEs of 4 lanes aggregate random shards held in scratchpad
// models. Each run compares every aggregate word with a reference computed here:
// (1) 61 random edges, apply u * v, reduce sum; (2) the same edges, apply pass u,
// reduce max; (3) a conflict-free shard (destination of edge e owned by GPE e mod 4),
// whose done must rise exactly ceil(E / 4) * wpb + 2 cycles after start is sampled.
// Arbitration conflicts must occur in the random runs.
module tb_shard_compute_unit;
  import gnn_pkg::*;
  localparam int G = 4, L = 4, W = L * DATA_W, WPB = 2, NN = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done, arb_stall;
  logic [31:0] edge_count = 0;
  logic [7:0] wpb = WPB;
  apply_op_e apply_op = AP_MUL;
  reduce_op_e reduce_op = RD_SUM;
  logic [7:0] meta_raddr [G];
  edge_t meta_rdata [G];
  logic [5:0] src_raddr [G], dsti_raddr [G], acc_raddr [G], acc_waddr [G];
  logic [W-1:0] src_rdata [G], dsti_rdata [G], acc_rdata [G], acc_wdata [G];
  logic acc_we [G];
  edge_t edges [256];
  logic [W-1:0] srcm [64], dstm [64], accm [64], refm [64];
  int checks = 0, failures = 0, stalls = 0;
  longint cyc = 0, t0 = 0, t1 = 0;
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (arb_stall) stalls++;
  end

  shard_compute_unit #(.NUM_GPE(G), .LANES(L), .EAW(8), .FAW(6)) dut (.*);

  for (genvar g = 0; g < G; g++) begin : g_mem
    assign meta_rdata[g] = edges[meta_raddr[g]];
    assign src_rdata[g]  = srcm[src_raddr[g]];
    assign dsti_rdata[g] = dstm[dsti_raddr[g]];
    assign acc_rdata[g]  = accm[acc_raddr[g]];
    always @(posedge clk) if (acc_we[g]) accm[acc_waddr[g]] <= acc_wdata[g];
  end

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int ne, input apply_op_e aop, input reduce_op_e rop);
    for (int i = 0; i < 64; i++) begin
      accm[i] = {$urandom, $urandom, $urandom, $urandom};
      refm[i] = accm[i];
    end
    for (int e = 0; e < ne; e++) for (int k = 0; k < WPB; k++) begin
      automatic int s = edges[e].src, d = edges[e].dst;
      for (int l = 0; l < L; l++)
        refm[d*WPB+k][l*DATA_W +: DATA_W] = reduce_fn(rop, refm[d*WPB+k][l*DATA_W +: DATA_W],
          apply_fn(aop, srcm[s*WPB+k][l*DATA_W +: DATA_W], dstm[d*WPB+k][l*DATA_W +: DATA_W]));
    end
    @(negedge clk); start = 1; edge_count = ne; apply_op = aop; reduce_op = rop; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    for (int i = 0; i < NN * WPB; i++) begin
      checks++;
      if (accm[i] !== refm[i]) begin failures++; $display("word %0d differs", i); end
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) begin
      srcm[i] = {32'($urandom_range(0, 99)) - 50, 32'($urandom_range(0, 99)) - 50, 32'($urandom_range(0, 99)), 32'($urandom_range(0, 99))};
      dstm[i] = {32'($urandom_range(0, 99)) - 50, 32'($urandom_range(0, 99)), 32'($urandom_range(0, 99)) - 50, 32'($urandom_range(0, 99))};
    end
    for (int e = 0; e < 256; e++) begin edges[e].src = 16'($urandom_range(0, NN-1)); edges[e].dst = 16'($urandom_range(0, 5)); end
    repeat (2) @(posedge clk); rst_n = 1;
    run(61, AP_MUL, RD_SUM);
    run(61, AP_PASS_U, RD_MAX);
    checks++; if (stalls == 0) begin failures++; $display("no arbitration conflict"); end
    for (int e = 0; e < 256; e++) edges[e].dst = 16'(e % NN);
    stalls = 0;
    run(37, AP_ADD, RD_MIN);
    checks++;
    // measured from the cycle that drives start: one more than from the sampling edge
    if (t1 - t0 != ((37 + G - 1) / G) * WPB + 3) begin failures++; $display("conflict-free time %0d", t1 - t0); end
    checks++; if (stalls != 0) begin failures++; $display("unexpected stalls %0d", stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
