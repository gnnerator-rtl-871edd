// tb_dense_dram_ctrl: strided reads from both ports and a strided write, against
// behavioural DRAMs with random back-pressure; every word and index is checked.
module tb_dense_dram_ctrl;
  import gnn_pkg::*;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_write = 0, cmd_port = 0, done;
  logic [31:0] cmd_base = 0, cmd_stride = 0;
  logic [15:0] cmd_count = 0, rd_idx, wr_idx;
  logic rd_valid;
  logic [W-1:0] rd_data, wr_data;
  logic f_req_valid, f_req_ready, f_req_we, f_rsp_valid, w_req_valid, w_req_ready, w_rsp_valid;
  logic [31:0] f_req_addr, w_req_addr;
  logic [W-1:0] f_req_wdata, f_rsp_rdata, w_rsp_rdata;
  int checks = 0, failures = 0, got = 0;
  logic [W-1:0] src_buf [64];
  always #5 clk = ~clk;

  dense_dram_ctrl #(.WIDTH(W), .CNT_W(16)) dut (.*);
  tb_dram #(.W(W), .LAT(3), .RAND_READY(1)) u_f (.clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready),
    .req_we(f_req_we), .req_addr(f_req_addr), .req_wdata(f_req_wdata), .rsp_valid(f_rsp_valid), .rsp_rdata(f_rsp_rdata));
  tb_dram #(.W(W), .LAT(5), .RAND_READY(1)) u_w (.clk, .rst_n, .req_valid(w_req_valid), .req_ready(w_req_ready),
    .req_we(1'b0), .req_addr(w_req_addr), .req_wdata('0), .rsp_valid(w_rsp_valid), .rsp_rdata(w_rsp_rdata));

  assign wr_data = src_buf[wr_idx[5:0]];

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // read stream checker
  logic [31:0] exp_base, exp_stride;
  logic        exp_port;
  always @(posedge clk) if (rd_valid) begin
    automatic logic [W-1:0] e = exp_port ? u_w.peek(exp_base + rd_idx * exp_stride)
                                         : u_f.peek(exp_base + rd_idx * exp_stride);
    checks++;
    if (rd_idx != 16'(got) || rd_data !== e) begin failures++; $display("rd %0d data mismatch", rd_idx); end
    got++;
  end

  task automatic run(input logic wr, input logic port, input int base, input int stride, input int cnt);
    exp_base = base; exp_stride = stride; exp_port = port; got = 0;
    @(negedge clk);
    cmd_valid = 1; cmd_write = wr; cmd_port = port; cmd_base = base; cmd_stride = stride; cmd_count = 16'(cnt);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    if (!wr) begin checks++; if (got != cnt) begin failures++; $display("got %0d of %0d", got, cnt); end end
  endtask

  initial begin
    for (int a = 0; a < 1024; a++) begin u_f.mem[a] = {$urandom, $urandom}; u_w.mem[a] = {$urandom, $urandom}; end
    for (int i = 0; i < 64; i++) src_buf[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    run(0, 0, 10, 3, 50);
    run(0, 1, 7, 5, 64);
    run(1, 0, 2000, 2, 40);
    for (int i = 0; i < 40; i++) begin
      checks++; if (u_f.peek(2000 + 2*i) !== src_buf[i]) begin failures++; $display("write %0d wrong", i); end
    end
    run(0, 0, 0, 1, 0);  // empty transfer completes
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
