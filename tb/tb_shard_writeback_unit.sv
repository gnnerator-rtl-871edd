// tb_shard_writeback_unit: stores block 2 (2 words per node, 6 words per node in DRAM)
// of 9 nodes starting at node 4 through a back-pressured DRAM model and checks every
// DRAM word written and that the neighbouring words are untouched.
module tb_shard_writeback_unit;
  import gnn_pkg::*;
  localparam int W = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] dram_base = 300, node_base = 4;
  logic [15:0] node_cnt = 9, wpn = 6, word_off = 4;
  logic [7:0] wpb = 2, sp_raddr;
  logic [W-1:0] sp_rdata, f_req_wdata, sp [256];
  logic f_req_valid, f_req_ready, rsp_v;
  logic [31:0] f_req_addr;
  logic [W-1:0] rsp_d;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shard_writeback_unit #(.FAW(8), .W(W)) dut (.*);
  assign sp_rdata = sp[sp_raddr];
  tb_dram #(.W(W), .LAT(2), .RAND_READY(1)) u_f (.clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready),
    .req_we(1'b1), .req_addr(f_req_addr), .req_wdata(f_req_wdata), .rsp_valid(rsp_v), .rsp_rdata(rsp_d));

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) sp[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int n = 0; n < 9; n++) for (int k = 0; k < 6; k++) begin
      automatic logic [W-1:0] got = u_f.peek(300 + (4+n)*6 + k);
      checks++;
      if (k >= 4) begin if (got !== sp[n*2 + k - 4]) begin failures++; $display("node %0d k %0d", n, k); end end
      else if (got !== '0) begin failures++; $display("node %0d word %0d overwritten", n, k); end
    end
    checks++; if (u_f.writes != 18) begin failures++; $display("writes %0d", u_f.writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
