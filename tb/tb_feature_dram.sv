// tb_feature_dram: behavioural model of the shared Feature DRAM for the testbenches (not
// part of the design). One sparse store of GW-bit words with two ports: a Graph Engine
// port of GW-bit words and a Dense Engine port of 2*GW-bit words (dense word a is
// graph words 2a and 2a+1, low half first). Each port accepts one request per cycle and
// answers reads in order LAT cycles later; requests are ignored while rst_n is low.
module tb_feature_dram #(
  parameter int unsigned GW  = 1024,
  parameter int unsigned LAT = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            g_req_valid,
  output logic            g_req_ready,
  input  logic            g_req_we,
  input  logic [31:0]     g_req_addr,
  input  logic [GW-1:0]   g_req_wdata,
  output logic            g_rsp_valid,
  output logic [GW-1:0]   g_rsp_rdata,
  input  logic            d_req_valid,
  output logic            d_req_ready,
  input  logic            d_req_we,
  input  logic [31:0]     d_req_addr,
  input  logic [2*GW-1:0] d_req_wdata,
  output logic            d_rsp_valid,
  output logic [2*GW-1:0] d_rsp_rdata
);
  logic [GW-1:0]   mem [int unsigned];
  logic [GW-1:0]   gq [$];
  logic [2*GW-1:0] dq [$];
  longint          gt [$], dt [$];
  longint          cyc = 0;

  function automatic logic [GW-1:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    g_req_ready = 1'b1; d_req_ready = 1'b1;
    g_rsp_valid = 1'b0; d_rsp_valid = 1'b0;
    g_rsp_rdata = '0;   d_rsp_rdata = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && g_req_valid && g_req_ready) begin
      if (g_req_we) mem[g_req_addr] = g_req_wdata;
      else begin gq.push_back(peek(g_req_addr)); gt.push_back(cyc + LAT); end
    end
    if (rst_n && d_req_valid && d_req_ready) begin
      if (d_req_we) begin
        mem[2*d_req_addr]   = d_req_wdata[GW-1:0];
        mem[2*d_req_addr+1] = d_req_wdata[2*GW-1:GW];
      end else begin
        dq.push_back({peek(2*d_req_addr+1), peek(2*d_req_addr)});
        dt.push_back(cyc + LAT);
      end
    end
    if (gt.size() > 0 && gt[0] <= cyc) begin
      g_rsp_valid <= 1'b1; g_rsp_rdata <= gq.pop_front(); void'(gt.pop_front());
    end else g_rsp_valid <= 1'b0;
    if (dt.size() > 0 && dt[0] <= cyc) begin
      d_rsp_valid <= 1'b1; d_rsp_rdata <= dq.pop_front(); void'(dt.pop_front());
    end else d_rsp_valid <= 1'b0;
  end
endmodule
