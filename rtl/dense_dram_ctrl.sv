// dense_dram_ctrl: the Dense Engine's own memory controller.
//
// A strided stream mover between the Dense Engine's buffers and two off-chip ports,
// Feature DRAM (read and write) and Weight DRAM (read only). A command names the
// direction, the port, a base word address, a stride and a word count. For a read it
// issues one request per cycle while the port is ready (base, base+stride, ...) and
// returns the in-order responses as a stream (rd_valid, rd_idx = word number,
// rd_data). For a write it asks the buffer for word wr_idx (combinational read,
// wr_data) and issues the write. done pulses for one cycle when the last response has
// arrived (read) or the last write has been accepted (write). The paper says only that
// the Dense Engine has its own memory controller, needed for the Dense Engine to act as
// producer and to reload partial sums; this stream interface is this design's own.
module dense_dram_ctrl
  import gnn_pkg::*;
#(
  parameter int unsigned WIDTH = 2048,
  parameter int unsigned CNT_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_write,
  input  logic              cmd_port,     // 0: Feature DRAM, 1: Weight DRAM
  input  logic [ADDR_W-1:0] cmd_base,
  input  logic [ADDR_W-1:0] cmd_stride,
  input  logic [CNT_W-1:0]  cmd_count,
  output logic              done,
  // read stream into a buffer
  output logic              rd_valid,
  output logic [CNT_W-1:0]  rd_idx,
  output logic [WIDTH-1:0]  rd_data,
  // write source from a buffer
  output logic [CNT_W-1:0]  wr_idx,
  input  logic [WIDTH-1:0]  wr_data,
  // Feature DRAM port
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output logic              f_req_we,
  output logic [ADDR_W-1:0] f_req_addr,
  output logic [WIDTH-1:0]  f_req_wdata,
  input  logic              f_rsp_valid,
  input  logic [WIDTH-1:0]  f_rsp_rdata,
  // Weight DRAM port (read only)
  output logic              w_req_valid,
  input  logic              w_req_ready,
  output logic [ADDR_W-1:0] w_req_addr,
  input  logic              w_rsp_valid,
  input  logic [WIDTH-1:0]  w_rsp_rdata
);
  logic              busy, wr_q, port_q;
  logic [ADDR_W-1:0] addr_q, stride_q;
  logic [CNT_W-1:0]  count_q, issued_q, recvd_q;

  logic issuing, req_ready, rsp_valid, fire, finish;
  logic [WIDTH-1:0] rsp_data;

  assign issuing   = busy && (issued_q != count_q);
  assign req_ready = port_q ? w_req_ready : f_req_ready;
  assign rsp_valid = busy && !wr_q && (port_q ? w_rsp_valid : f_rsp_valid);
  assign rsp_data  = port_q ? w_rsp_rdata : f_rsp_rdata;
  assign fire      = issuing && req_ready;

  assign f_req_valid = issuing && !port_q;
  assign f_req_we    = wr_q;
  assign f_req_addr  = addr_q;
  assign f_req_wdata = wr_data;
  assign w_req_valid = issuing && port_q;
  assign w_req_addr  = addr_q;

  assign wr_idx   = issued_q;
  assign rd_valid = rsp_valid;
  assign rd_idx   = recvd_q;
  assign rd_data  = rsp_data;

  assign cmd_ready = !busy;
  assign finish = busy && (wr_q ? (issued_q == count_q)
                                : (recvd_q + CNT_W'(rsp_valid) == count_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; wr_q <= 1'b0; port_q <= 1'b0;
      addr_q <= '0; stride_q <= '0; count_q <= '0; issued_q <= '0; recvd_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (cmd_valid) begin
          busy <= 1'b1; wr_q <= cmd_write; port_q <= cmd_port;
          addr_q <= cmd_base; stride_q <= cmd_stride; count_q <= cmd_count;
          issued_q <= '0; recvd_q <= '0;
        end
      end else begin
        if (fire) begin
          issued_q <= issued_q + 1'b1;
          addr_q   <= addr_q + stride_q;
        end
        if (rsp_valid) recvd_q <= recvd_q + 1'b1;
        if (finish) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // a write command never uses the read-only Weight DRAM port
  a_no_weight_write: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> !(cmd_write && cmd_port));
endmodule
