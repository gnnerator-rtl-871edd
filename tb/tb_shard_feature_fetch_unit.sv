// tb_shard_feature_fetch_unit: loads dimension block 1 (3 words per node, 7 words per
// node in DRAM) of 11 nodes starting at node 20, once to the source side and once to
// the destination side, through a back-pressured DRAM model; checks every scratchpad
// word and the to_dst flag.
module tb_shard_feature_fetch_unit;
  import gnn_pkg::*;
  localparam int W = 64;
  logic clk = 0, rst_n = 0, start = 0, to_dst = 0, busy, done;
  logic [31:0] dram_base = 500, node_base = 20;
  logic [15:0] node_cnt = 11, wpn = 7, word_off = 3;
  logic [7:0] wpb = 3;
  logic f_req_valid, f_req_ready, f_rsp_valid, sp_we, sp_to_dst;
  logic [31:0] f_req_addr;
  logic [W-1:0] f_rsp_rdata, sp_wdata, sp [2][256];
  logic [7:0] sp_waddr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shard_feature_fetch_unit #(.FAW(8), .W(W)) dut (.*);
  tb_dram #(.W(W), .LAT(5), .RAND_READY(1)) u_f (.clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready),
    .req_we(1'b0), .req_addr(f_req_addr), .req_wdata('0), .rsp_valid(f_rsp_valid), .rsp_rdata(f_rsp_rdata));
  always @(posedge clk) if (sp_we) sp[sp_to_dst][sp_waddr] <= sp_wdata;

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) u_f.mem[i] = {$urandom, $urandom};
    for (int b = 0; b < 2; b++) for (int i = 0; i < 256; i++) sp[b][i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int d = 0; d < 2; d++) begin
      @(negedge clk); to_dst = d[0]; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int n = 0; n < 11; n++) for (int k = 0; k < 3; k++) begin
        checks++;
        if (sp[d][n*3+k] !== u_f.peek(500 + (20+n)*7 + 3 + k)) begin failures++; $display("side %0d node %0d k %0d", d, n, k); end
      end
      checks++; if (sp[d][33] !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
