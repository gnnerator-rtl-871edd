// tb_xbar_arbiter: random requests from 5 GPEs to 5 reduce lanes. Each cycle checks that
// every output carries a granted requester that owns it (dst mod 5), that each granted
// requester appears on exactly one output, that an output is idle only when nobody asks
// for it, and that a held request is granted within N cycles (round-robin fairness).
module tb_xbar_arbiter;
  localparam int N = 5, W = 16;
  logic clk = 0, rst_n = 0;
  logic req_valid [N], grant [N], out_valid [N];
  logic [15:0] req_dst [N], out_dst [N];
  logic [7:0] req_k [N], out_k [N];
  logic [W-1:0] req_vec [N], out_vec [N];
  int wait_cyc [N];
  bit taken [N];   // granted at the last check, consumed at the clock edge
  int checks = 0, failures = 0, conflicts = 0;
  always #5 clk = ~clk;

  xbar_arbiter #(.N(N), .W(W)) dut (.*);

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin taken[i] = 0; req_valid[i] = 0; req_dst[i] = 0; req_k[i] = 0; req_vec[i] = 0; wait_cyc[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if (!req_valid[i] || taken[i]) begin
        req_valid[i] = ($urandom_range(0, 3) != 0);
        req_dst[i] = 16'($urandom_range(0, 9) % ((t % 50 < 25) ? 2 : 10)); // phases with heavy conflicts
        req_k[i] = 8'(i); req_vec[i] = W'($urandom);
        wait_cyc[i] = 0;
      end
      #1;
      for (int o = 0; o < N; o++) begin
        automatic bit want = 0;
        for (int i = 0; i < N; i++) if (req_valid[i] && req_dst[i] % N == o) want = 1;
        checks++;
        if (out_valid[o] != want) begin failures++; $display("out %0d valid %0d want %0d", o, out_valid[o], want); end
        if (out_valid[o]) begin
          automatic int i = out_k[o];
          checks++;
          if (!grant[i] || req_dst[i] % N != o || out_dst[o] != req_dst[i] || out_vec[o] != req_vec[i]) begin
            failures++; $display("out %0d carries bad requester %0d", o, i);
          end
        end
      end
      for (int i = 0; i < N; i++) begin
        automatic int hits = 0;
        for (int o = 0; o < N; o++) if (out_valid[o] && out_k[o] == 8'(i)) hits++;
        checks++;
        if (hits != (grant[i] ? 1 : 0)) begin failures++; $display("requester %0d on %0d outputs", i, hits); end
        taken[i] = req_valid[i] && grant[i];
        if (req_valid[i] && !grant[i]) begin
          conflicts++;
          wait_cyc[i]++;
          checks++;
          if (wait_cyc[i] >= N) begin failures++; $display("requester %0d starved", i); end
        end
      end
    end
    checks++; if (conflicts == 0) begin failures++; $display("no conflict exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
