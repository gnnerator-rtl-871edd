// tb_dense_pe: self-checking test of one systolic-array cell: weight shift chain,
// registered forwarding of the input and psum = psum_in + w * x one cycle later.
module tb_dense_pe;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0, w_load = 0;
  elem_t w_in = 0, x_in = 0, p_in = 0, w_out, x_out, p_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dense_pe dut (.clk, .rst_n, .w_load, .w_in, .w_out, .x_in, .x_out, .psum_in(p_in), .psum_out(p_out));

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    elem_t w, x, p;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      w = elem_t'($urandom_range(0, 2000)) - 1000;
      @(negedge clk); w_load = 1; w_in = w;
      @(negedge clk); w_load = 0; w_in = elem_t'($urandom);
      checks++; if (w_out !== w) begin failures++; $display("w_out %0d exp %0d", w_out, w); end
      x = elem_t'($urandom_range(0, 2000)) - 1000;
      p = elem_t'($urandom);
      x_in = x; p_in = p;
      @(negedge clk);
      checks++; if (p_out !== p + w * x) begin failures++; $display("psum %0d exp %0d", p_out, p + w * x); end
      checks++; if (x_out !== x) failures++;
      checks++; if (w_out !== w) failures++;  // weight held while w_load low
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
