// tb_edge_fetcher: GPE 2 of 4 steps through its interleaved edges of a 23-edge shard,
// three words per edge, under random back-pressure; every item is checked, then a
// second shard is started.
module tb_edge_fetcher;
  import gnn_pkg::*;
  localparam int ID = 2, G = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, out_valid, out_ready = 0;
  logic [31:0] edge_count = 0;
  logic [7:0] wpb = 3, out_k;
  logic [9:0] meta_raddr;
  edge_t meta_rdata, edges [1024];
  logic [15:0] out_src, out_dst;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  edge_fetcher #(.ID(ID), .NUM_GPE(G), .EAW(10)) dut (.*);
  assign meta_rdata = edges[meta_raddr];

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_shard(input int cnt, input int words);
    int e = ID, k = 0, items = 0;
    @(negedge clk); edge_count = cnt; wpb = 8'(words); start = 1;
    @(negedge clk); start = 0;
    while (busy) begin
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (out_src != edges[e].src || out_dst != edges[e].dst || out_k != 8'(k)) begin
          failures++; $display("item edge %0d k %0d", e, k);
        end
        items++;
        k++; if (k == words) begin k = 0; e += G; end
      end
      @(negedge clk);
    end
    checks++;
    if (items != ((cnt - ID + G - 1) / G) * words) begin failures++; $display("items %0d", items); end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) edges[i] = edge_t'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    run_shard(23, 3);
    run_shard(9, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
