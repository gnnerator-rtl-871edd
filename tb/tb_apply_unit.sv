// tb_apply_unit: random operand vectors for every operation, checked lane by lane.
module tb_apply_unit;
  import gnn_pkg::*;
  localparam int L = 8;
  apply_op_e op;
  logic [L*DATA_W-1:0] u, v, y;
  int checks = 0, failures = 0;

  apply_unit #(.LANES(L)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      op = apply_op_e'(t % 4);
      for (int l = 0; l < L; l++) begin
        u[l*DATA_W +: DATA_W] = $urandom_range(0, 20000) - 10000;
        v[l*DATA_W +: DATA_W] = $urandom_range(0, 20000) - 10000;
      end
      #1;
      for (int l = 0; l < L; l++) begin
        automatic int a = int'(u[l*DATA_W +: DATA_W]), b = int'(v[l*DATA_W +: DATA_W]), e;
        case (t % 4) 0: e = a; 1: e = a + b; 2: e = a * b; default: e = a - b; endcase
        checks++;
        if (int'(y[l*DATA_W +: DATA_W]) != e) begin failures++; $display("op %0d lane %0d", t % 4, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
