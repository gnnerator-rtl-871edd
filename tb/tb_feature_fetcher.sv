// tb_feature_fetcher: address node * wpb + k and returned word for random inputs.
module tb_feature_fetcher;
  logic [15:0] node;
  logic [7:0] k, wpb;
  logic [12:0] raddr;
  logic [31:0] rdata, data;
  int checks = 0, failures = 0;

  feature_fetcher #(.AW(13), .WIDTH(32)) dut (.*);
  assign rdata = {19'h5a5a5, raddr};   // memory model: word depends on its address

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      wpb = 8'($urandom_range(1, 8));
      node = 16'($urandom_range(0, 8192 / wpb - 1));
      k = 8'($urandom_range(0, wpb - 1));
      #1;
      checks += 2;
      if (raddr != 13'(node * wpb + k)) begin failures++; $display("addr %0d node %0d wpb %0d k %0d", raddr, node, wpb, k); end
      if (data !== {19'h5a5a5, 13'(node * wpb + k)}) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
