// tb_pingpong_ram: fills the load-side bank, swaps, and checks that the compute side
// reads it while the load side fills the other bank; also checks compute-side writes
// and the load-side read port.
module tb_pingpong_ram;
  localparam int D = 32, W = 24, NR = 3, NW = 2;
  logic clk = 0, sel = 0;
  logic [4:0] c_raddr [NR], c_waddr [NW], d_raddr = 0, d_waddr = 0;
  logic [W-1:0] c_rdata [NR], c_wdata [NW], d_rdata, d_wdata = 0;
  logic c_we [NW], d_we = 0;
  logic [W-1:0] bank [2][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pingpong_ram #(.DEPTH(D), .WIDTH(W), .NR(NR), .NW(NW)) dut (.*);

  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fill(input logic b);   // fill bank b through the load side (sel = !b)
    for (int a = 0; a < D; a++) begin
      @(negedge clk); d_we = 1; d_waddr = 5'(a); d_wdata = W'($urandom); bank[b][a] = d_wdata;
    end
    @(negedge clk); d_we = 0;
  endtask

  initial begin
    for (int p = 0; p < NR; p++) c_raddr[p] = 0;
    for (int p = 0; p < NW; p++) begin c_we[p] = 0; c_waddr[p] = 0; c_wdata[p] = 0; end
    sel = 1; fill(0);
    sel = 0; fill(1);            // compute on bank 0 while bank 1 loads
    for (int t = 0; t < 100; t++) begin
      for (int p = 0; p < NR; p++) c_raddr[p] = 5'($urandom_range(0, D-1));
      d_raddr = 5'($urandom_range(0, D-1));
      #1;
      for (int p = 0; p < NR; p++) begin checks++; if (c_rdata[p] !== bank[0][c_raddr[p]]) failures++; end
      checks++; if (d_rdata !== bank[1][d_raddr]) failures++;
      @(negedge clk);
    end
    sel = 1;                     // swap
    for (int t = 0; t < 50; t++) begin
      c_we[0] = 1; c_waddr[0] = 5'(2*t % D); c_wdata[0] = W'($urandom);
      c_we[1] = 1; c_waddr[1] = 5'((2*t+1) % D); c_wdata[1] = W'($urandom);
      @(negedge clk);
      bank[1][c_waddr[0]] = c_wdata[0]; bank[1][c_waddr[1]] = c_wdata[1];
      c_we[0] = 0; c_we[1] = 0;
      for (int p = 0; p < NR; p++) c_raddr[p] = 5'($urandom_range(0, D-1));
      d_raddr = 5'($urandom_range(0, D-1));
      #1;
      for (int p = 0; p < NR; p++) begin checks++; if (c_rdata[p] !== bank[1][c_raddr[p]]) failures++; end
      checks++; if (d_rdata !== bank[0][d_raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
