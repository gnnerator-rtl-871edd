// tb_systolic_array: loads a random weight tile, streams back-to-back input vectors and
// compares every output vector with x * W computed here; checks that the first result
// appears exactly ROWS + COLS - 1 cycles after the first input. A non-square 6 x 5 array
// catches row/column mix-ups.
module tb_systolic_array;
  import gnn_pkg::*;
  localparam int R = 6, C = 5, N = 40;
  logic clk = 0, rst_n = 0, w_load = 0, x_valid = 0, y_valid;
  elem_t w_row [C], x_vec [R], y_vec [C];
  elem_t Wm [R][C], X [N][R];
  int checks = 0, failures = 0, nout = 0;
  longint cyc = 0, t_in = -1, t_out = -1;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && y_valid) begin
    if (t_out < 0) t_out = cyc;
    for (int c = 0; c < C; c++) begin
      automatic elem_t e = 0;
      for (int r = 0; r < R; r++) e += X[nout][r] * Wm[r][c];
      checks++;
      if (y_vec[c] !== e) begin failures++; $display("node %0d col %0d got %0d exp %0d", nout, c, y_vec[c], e); end
    end
    nout++;
  end

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) Wm[r][c] = elem_t'($urandom_range(0, 200)) - 100;
    for (int n = 0; n < N; n++) for (int r = 0; r < R; r++) X[n][r] = elem_t'($urandom_range(0, 200)) - 100;
    for (int r = 0; r < R; r++) x_vec[r] = 0;
    for (int c = 0; c < C; c++) w_row[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weights: row R-1 first
    for (int k = 0; k < R; k++) begin
      @(negedge clk); w_load = 1;
      for (int c = 0; c < C; c++) w_row[c] = Wm[R-1-k][c];
    end
    @(negedge clk); w_load = 0;
    for (int n = 0; n < N; n++) begin
      x_valid = 1;
      for (int r = 0; r < R; r++) x_vec[r] = X[n][r];
      if (n == 0) t_in = cyc;
      @(negedge clk);
    end
    x_valid = 0;
    repeat (R + C + 5) @(negedge clk);
    checks++; if (nout != N) begin failures++; $display("outputs %0d", nout); end
    checks++; if (t_out - t_in != R + C - 1) begin failures++; $display("latency %0d", t_out - t_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
