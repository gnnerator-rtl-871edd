// xbar_arbiter: Arbiter and X-Bar between the GPEs' Apply Units and their Reduce Units.
//
// Reduce Unit o owns the destination nodes with local index dst mod N. Each cycle every
// requesting GPE i asks for the Reduce Unit owning its result's destination; for every
// Reduce Unit a round-robin arbiter grants one of the GPEs asking for it, and the X-Bar
// routes that GPE's result (destination, word k, vector) to it. A GPE not granted keeps
// its request. Destinations of different Reduce Units never collide, so up to N results
// are accepted per cycle. The paper's figure names an Arbiter and an X-Bar between the
// Apply and Reduce Units; ownership by dst mod N and round-robin priority are this
// design's own. Combinational except for the round-robin pointers.
module xbar_arbiter #(
  parameter int unsigned N = 32,
  parameter int unsigned W = 1024
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid [N],
  input  logic [15:0]   req_dst   [N],
  input  logic [7:0]    req_k     [N],
  input  logic [W-1:0]  req_vec   [N],
  output logic          grant     [N],
  output logic          out_valid [N],
  output logic [15:0]   out_dst   [N],
  output logic [7:0]    out_k     [N],
  output logic [W-1:0]  out_vec   [N]
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] rr_q  [N];   // last granted requester per output
  logic [IW-1:0] sel   [N];
  logic [IW-1:0] owner [N];

  for (genvar i = 0; i < N; i++) begin : g_owner
    assign owner[i] = IW'(32'(req_dst[i]) % N);
  end

  always_comb begin
    for (int i = 0; i < N; i++) grant[i] = 1'b0;
    for (int o = 0; o < N; o++) begin
      out_valid[o] = 1'b0;
      sel[o]       = '0;
      // first requester after the last granted one, in circular order
      for (int d = 1; d <= N; d++) begin
        automatic int unsigned i = (32'(rr_q[o]) + d) % N;
        if (!out_valid[o] && req_valid[i] && owner[i] == IW'(o)) begin
          out_valid[o] = 1'b1;
          sel[o]       = IW'(i);
        end
      end
      if (out_valid[o]) grant[sel[o]] = 1'b1;
      out_dst[o] = req_dst[sel[o]];
      out_k[o]   = req_k[sel[o]];
      out_vec[o] = req_vec[sel[o]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N; o++) rr_q[o] <= IW'(N - 1);
    end else begin
      for (int o = 0; o < N; o++) if (out_valid[o]) rr_q[o] <= sel[o];
    end
  end
endmodule
