// tb_gpe: one GPE (ID 1 of 3, 4 lanes, 2 words per node) over a 14-edge shard with
// apply = u + v; the arbiter grant is random. Every result (destination, word, vector)
// is checked against the scratchpad contents in the order the edges are assigned.
module tb_gpe;
  import gnn_pkg::*;
  localparam int L = 4, W = L * DATA_W, G = 3, ID = 1, WPB = 2, NE = 14;
  logic clk = 0, rst_n = 0, start = 0, busy, res_valid, res_grant = 0;
  logic [31:0] edge_count = NE;
  logic [7:0] wpb = WPB, res_k;
  apply_op_e apply_op = AP_ADD;
  logic [7:0] meta_raddr;
  edge_t meta_rdata;
  logic [5:0] src_raddr, dsti_raddr;
  logic [W-1:0] src_rdata, dsti_rdata, res_vec;
  logic [15:0] res_dst;
  edge_t edges [256];
  logic [W-1:0] srcm [64], dstm [64];
  int checks = 0, failures = 0, e = ID, k = 0, items = 0;
  always #5 clk = ~clk;

  gpe #(.ID(ID), .NUM_GPE(G), .LANES(L), .EAW(8), .FAW(6)) dut (.*);
  assign meta_rdata = edges[meta_raddr];
  assign src_rdata  = srcm[src_raddr];
  assign dsti_rdata = dstm[dsti_raddr];

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && res_valid && res_grant) begin
    automatic int s = edges[e].src, d = edges[e].dst;
    checks++;
    if (res_dst != 16'(d) || res_k != 8'(k)) begin failures++; $display("tag edge %0d", e); end
    for (int l = 0; l < L; l++) begin
      automatic elem_t ex = elem_t'(srcm[s*WPB+k][l*DATA_W +: DATA_W]) + elem_t'(dstm[d*WPB+k][l*DATA_W +: DATA_W]);
      checks++;
      if (elem_t'(res_vec[l*DATA_W +: DATA_W]) !== ex) begin failures++; $display("vec edge %0d lane %0d", e, l); end
    end
    items++;
    k++; if (k == WPB) begin k = 0; e += G; end
  end

  always @(negedge clk) res_grant <= ($urandom_range(0, 2) != 0);

  initial begin
    for (int i = 0; i < 256; i++) begin edges[i].src = 16'($urandom_range(0, 31)); edges[i].dst = 16'($urandom_range(0, 31)); end
    for (int i = 0; i < 64; i++) begin srcm[i] = {$urandom, $urandom, $urandom, $urandom}; dstm[i] = {$urandom, $urandom, $urandom, $urandom}; end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    checks++; if (items != ((NE - ID + G - 1) / G) * WPB) begin failures++; $display("items %0d", items); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
