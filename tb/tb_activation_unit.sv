// tb_activation_unit: random vectors through the partial-sum add and ReLU options,
// checked one cycle later against values computed here.
module tb_activation_unit;
  import gnn_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, add_psum = 0, out_valid;
  logic [15:0] in_idx = 0, out_idx;
  act_e act = ACT_NONE;
  elem_t y [L], psum [L], z [L], e [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  activation_unit #(.LANES(L), .IDX_W(16)) dut (.*);

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin y[l] = 0; psum[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = 1; in_idx = 16'(t); add_psum = $urandom_range(0, 1) != 0;
      act = ($urandom_range(0, 1) != 0) ? ACT_RELU : ACT_NONE;
      for (int l = 0; l < L; l++) begin
        y[l] = elem_t'($urandom_range(0, 2000)) - 1000;
        psum[l] = elem_t'($urandom_range(0, 2000)) - 1000;
        e[l] = y[l] + (add_psum ? psum[l] : 0);
        if (act == ACT_RELU && e[l] < 0) e[l] = 0;
      end
      @(negedge clk);
      in_valid = 0;
      checks++; if (!out_valid || out_idx != 16'(t)) failures++;
      for (int l = 0; l < L; l++) begin
        checks++; if (z[l] !== e[l]) begin failures++; $display("lane %0d got %0d exp %0d", l, z[l], e[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
