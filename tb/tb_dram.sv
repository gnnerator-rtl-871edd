// tb_dram: behavioural model of one off-chip DRAM port for the testbenches (not part of
// the design). Sparse storage of W-bit words; requests accepted when req_valid and
// req_ready; read data return in order LAT cycles later, one per cycle. With
// RAND_READY set, req_ready drops at random to exercise back-pressure. Testbenches
// preload and inspect `mem` hierarchically. Requests are ignored while rst_n is low.
module tb_dram #(
  parameter int unsigned W          = 32,
  parameter int unsigned LAT        = 4,
  parameter bit          RAND_READY = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [31:0]   req_addr,
  input  logic [W-1:0]  req_wdata,
  output logic          rsp_valid,
  output logic [W-1:0]  rsp_rdata
);
  logic [W-1:0] mem [int unsigned];
  logic [W-1:0] q_data [$];
  longint       q_time [$];
  longint       cyc = 0;
  int unsigned  reads = 0, writes = 0;

  function automatic logic [W-1:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_rdata = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr] = req_wdata;
        writes++;
      end else begin
        q_data.push_back(peek(req_addr));
        q_time.push_back(cyc + LAT);
        reads++;
      end
    end
    if (q_time.size() > 0 && q_time[0] <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_rdata <= q_data.pop_front();
      void'(q_time.pop_front());
    end else begin
      rsp_valid <= 1'b0;
    end
    req_ready <= RAND_READY ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
endmodule
