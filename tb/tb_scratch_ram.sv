// tb_scratch_ram: writes random words and reads them back through both read ports.
module tb_scratch_ram;
  localparam int D = 64, W = 40;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr [2];
  logic [W-1:0] wdata = 0, rdata [2], ref_m [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  scratch_ram #(.DEPTH(D), .WIDTH(W), .NRD(2)) dut (.*);

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    raddr[0] = 0; raddr[1] = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = {$urandom, 8'(a)}; ref_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      int a = $urandom_range(0, D-1), b = $urandom_range(0, D-1);
      if (t % 3 == 0) begin
        we = 1; waddr = 6'(a); wdata = {$urandom, 8'(t)};
        @(negedge clk); ref_m[a] = wdata; we = 0;
      end
      raddr[0] = 6'(a); raddr[1] = 6'(b);
      #1;
      checks += 2;
      if (rdata[0] !== ref_m[a]) failures++;
      if (rdata[1] !== ref_m[b]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
