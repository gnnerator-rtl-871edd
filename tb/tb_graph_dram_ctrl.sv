// tb_graph_dram_ctrl: random read and write requests from both masters; checks that the
// writeback unit wins when both ask, that the fetch unit is held meanwhile, and that
// port fields and responses are routed unchanged.
module tb_graph_dram_ctrl;
  import gnn_pkg::*;
  localparam int W = 16;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready;
  logic [31:0] rd_req_addr, wr_req_addr, f_req_addr;
  logic [W-1:0] rd_rsp_rdata, wr_req_wdata, f_req_wdata, f_rsp_rdata;
  logic f_req_valid, f_req_ready, f_req_we, f_rsp_valid;
  int checks = 0, failures = 0, both = 0;

  graph_dram_ctrl #(.W(W)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      rd_req_valid = $urandom_range(0, 1); wr_req_valid = $urandom_range(0, 1); f_req_ready = $urandom_range(0, 1);
      rd_req_addr = $urandom; wr_req_addr = $urandom; wr_req_wdata = W'($urandom);
      f_rsp_valid = $urandom_range(0, 1); f_rsp_rdata = W'($urandom);
      #1;
      if (rd_req_valid && wr_req_valid) both++;
      checks += 4;
      if (f_req_valid != (rd_req_valid || wr_req_valid)) failures++;
      if (wr_req_valid && (!f_req_we || f_req_addr != wr_req_addr || f_req_wdata != wr_req_wdata || wr_req_ready != f_req_ready || rd_req_ready)) failures++;
      if (!wr_req_valid && rd_req_valid && (f_req_we || f_req_addr != rd_req_addr || rd_req_ready != f_req_ready)) failures++;
      if (rd_rsp_valid != f_rsp_valid || rd_rsp_rdata != f_rsp_rdata) failures++;
      #1;
    end
    checks++; if (both == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
