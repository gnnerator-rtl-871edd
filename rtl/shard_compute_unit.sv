// shard_compute_unit: aggregation of one graph shard by NUM_GPE Graph Processing
// Elements (inter-node parallelism), each LANES lanes wide (intra-node parallelism).
//
// On start it runs the shard's edge list (edge_count edges) already in the Graph
// Metadata Buffer. GPE g takes edges g, g+NUM_GPE, ...; for each edge and each of the
// wpb words of the current feature block it reads the source feature and the
// destination's input feature, applies apply_op and offers the result to the
// Arbiter/X-Bar. Reduce lane o (Modified Feature Fetcher, Reduce Unit and the write of
// the updated aggregate, which is the GPE's Writeback Unit) owns destination nodes with
// dst mod NUM_GPE == o: it reads the running aggregate, folds the result in with
// reduce_op and writes it back in the same cycle. done pulses one cycle after the last
// update. arb_stall is high in a cycle where some GPE result waits for its Reduce Unit.
// Time: done rises ceil(edge_count / NUM_GPE) * wpb + 2 cycles after the edge that
// samples start when no two GPEs target the same
// reduce lane in a cycle, more otherwise. Units follow the paper's figure; the Special
// Function Unit it draws between Arbiter and X-Bar is left out because its function is
// not described.
module shard_compute_unit
  import gnn_pkg::*;
#(
  parameter int unsigned NUM_GPE = 32,
  parameter int unsigned LANES   = 32,
  parameter int unsigned EAW     = 21,
  parameter int unsigned FAW     = 13,
  localparam int unsigned W      = LANES * DATA_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [31:0]    edge_count,
  input  logic [7:0]     wpb,
  input  apply_op_e      apply_op,
  input  reduce_op_e     reduce_op,
  output logic           busy,
  output logic           done,
  output logic           arb_stall,
  // scratchpad ports, compute side
  output logic [EAW-1:0] meta_raddr [NUM_GPE],
  input  edge_t          meta_rdata [NUM_GPE],
  output logic [FAW-1:0] src_raddr  [NUM_GPE],
  input  logic [W-1:0]   src_rdata  [NUM_GPE],
  output logic [FAW-1:0] dsti_raddr [NUM_GPE],
  input  logic [W-1:0]   dsti_rdata [NUM_GPE],
  output logic [FAW-1:0] acc_raddr  [NUM_GPE],
  input  logic [W-1:0]   acc_rdata  [NUM_GPE],
  output logic           acc_we     [NUM_GPE],
  output logic [FAW-1:0] acc_waddr  [NUM_GPE],
  output logic [W-1:0]   acc_wdata  [NUM_GPE]
);
  logic         g_busy    [NUM_GPE];
  logic         res_valid [NUM_GPE];
  logic [15:0]  res_dst   [NUM_GPE];
  logic [7:0]   res_k     [NUM_GPE];
  logic [W-1:0] res_vec   [NUM_GPE];
  logic         grant     [NUM_GPE];
  logic         x_valid   [NUM_GPE];
  logic [15:0]  x_dst     [NUM_GPE];
  logic [7:0]   x_k       [NUM_GPE];
  logic [W-1:0] x_vec     [NUM_GPE];
  logic [W-1:0] acc_cur   [NUM_GPE];
  logic [7:0]   wpb_q;
  apply_op_e    aop_q;
  reduce_op_e   rop_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wpb_q <= 8'd1; aop_q <= AP_PASS_U; rop_q <= RD_SUM;
    end else if (start) begin
      wpb_q <= wpb; aop_q <= apply_op; rop_q <= reduce_op;
    end
  end

  for (genvar g = 0; g < NUM_GPE; g++) begin : g_gpe
    gpe #(.ID(g), .NUM_GPE(NUM_GPE), .LANES(LANES), .EAW(EAW), .FAW(FAW)) u_gpe (
      .clk, .rst_n, .start, .edge_count, .wpb(start ? wpb : wpb_q),
      .apply_op(aop_q), .busy(g_busy[g]),
      .meta_raddr(meta_raddr[g]), .meta_rdata(meta_rdata[g]),
      .src_raddr(src_raddr[g]),   .src_rdata(src_rdata[g]),
      .dsti_raddr(dsti_raddr[g]), .dsti_rdata(dsti_rdata[g]),
      .res_valid(res_valid[g]), .res_dst(res_dst[g]), .res_k(res_k[g]),
      .res_vec(res_vec[g]), .res_grant(grant[g]));
  end

  xbar_arbiter #(.N(NUM_GPE), .W(W)) u_xbar (
    .clk, .rst_n,
    .req_valid(res_valid), .req_dst(res_dst), .req_k(res_k), .req_vec(res_vec),
    .grant, .out_valid(x_valid), .out_dst(x_dst), .out_k(x_k), .out_vec(x_vec));

  for (genvar o = 0; o < NUM_GPE; o++) begin : g_red
    feature_fetcher #(.AW(FAW), .WIDTH(W)) u_mff (
      .node(x_dst[o]), .k(x_k[o]), .wpb(wpb_q), .raddr(acc_raddr[o]),
      .rdata(acc_rdata[o]), .data(acc_cur[o]));
    reduce_unit #(.LANES(LANES)) u_reduce (
      .op(rop_q), .acc(acc_cur[o]), .x(x_vec[o]), .y(acc_wdata[o]));
    assign acc_we[o]    = x_valid[o];
    assign acc_waddr[o] = acc_raddr[o];
  end

  logic running_q, any_busy;
  always_comb begin
    any_busy  = 1'b0;
    arb_stall = 1'b0;
    for (int g = 0; g < NUM_GPE; g++) begin
      any_busy  = any_busy | g_busy[g];
      arb_stall = arb_stall | (res_valid[g] & ~grant[g]);
    end
  end
  assign busy = running_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running_q <= 1'b1;
      end else if (running_q && !any_busy) begin
        running_q <= 1'b0;
        done      <= 1'b1;
      end
    end
  end
endmodule
