// tb_reduce_unit: random vectors for sum, max and min, checked lane by lane.
module tb_reduce_unit;
  import gnn_pkg::*;
  localparam int L = 8;
  reduce_op_e op;
  logic [L*DATA_W-1:0] acc, x, y;
  int checks = 0, failures = 0;

  reduce_unit #(.LANES(L)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      op = reduce_op_e'(t % 3);
      for (int l = 0; l < L; l++) begin
        acc[l*DATA_W +: DATA_W] = $urandom_range(0, 20000) - 10000;
        x[l*DATA_W +: DATA_W]   = $urandom_range(0, 20000) - 10000;
      end
      #1;
      for (int l = 0; l < L; l++) begin
        automatic int a = int'(acc[l*DATA_W +: DATA_W]), b = int'(x[l*DATA_W +: DATA_W]), e;
        case (t % 3) 0: e = a + b; 1: e = (a > b) ? a : b; default: e = (a < b) ? a : b; endcase
        checks++;
        if (int'(y[l*DATA_W +: DATA_W]) != e) begin failures++; $display("op %0d lane %0d", t % 3, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
