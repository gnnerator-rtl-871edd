// tb_shard_edge_fetch_unit: a shard table of three shards (17, 0 and 40 edges) in an
// Edge DRAM model with random back-pressure; each load is checked word by word in the
// metadata buffer model, with the reported edge count.
module tb_shard_edge_fetch_unit;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, m_we;
  logic [31:0] idx_addr = 0, edge_base = 1000, edge_count;
  logic e_req_valid, e_req_ready, e_rsp_valid;
  logic [31:0] e_req_addr, e_rsp_rdata;
  logic [9:0] m_waddr;
  edge_t m_wdata, meta [1024];
  int checks = 0, failures = 0;
  int offs [3] = '{5, 22, 22}, cnts [3] = '{17, 0, 40};
  always #5 clk = ~clk;

  shard_edge_fetch_unit #(.EAW(10)) dut (.*);
  tb_dram #(.W(32), .LAT(3), .RAND_READY(1)) u_e (.clk, .rst_n, .req_valid(e_req_valid), .req_ready(e_req_ready),
    .req_we(1'b0), .req_addr(e_req_addr), .req_wdata('0), .rsp_valid(e_rsp_valid), .rsp_rdata(e_rsp_rdata));
  always @(posedge clk) if (m_we) meta[m_waddr] <= m_wdata;

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 3; s++) begin u_e.mem[100 + 2*s] = offs[s]; u_e.mem[101 + 2*s] = cnts[s]; end
    for (int i = 0; i < 100; i++) u_e.mem[1000 + i] = $urandom;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      for (int i = 0; i < 1024; i++) meta[i] = '0;
      @(negedge clk); idx_addr = 100 + 2*s; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      checks++; if (edge_count != cnts[s]) begin failures++; $display("count %0d", edge_count); end
      for (int i = 0; i < cnts[s]; i++) begin
        checks++;
        if (meta[i] !== edge_t'(u_e.peek(1000 + offs[s] + i))) begin failures++; $display("shard %0d edge %0d", s, i); end
      end
      checks++; if (meta[cnts[s]] !== '0) failures++;   // nothing written past the list
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
