// pingpong_ram: double-buffered on-chip scratchpad of the Graph Engine (Feature
// Scratchpads and Graph Metadata Buffer).
//
// Two banks of DEPTH words. The compute side works on bank `sel`, the load/store side
// on the other bank, so the next shard can be loaded while the current one is
// processed; the controller flips `sel` between shards. The compute side has NR
// asynchronous read ports (one per Graph Processing Element) and NW write ports; the
// load/store side has one asynchronous read port and one write port. Writes take effect
// at the clock edge; writes through different ports in the same cycle must target
// different words (the Graph Engine guarantees this by giving each reduce unit its own
// destination nodes). Double buffering is the paper's; the port counts, asynchronous
// reads and one flat array per scratchpad are this design's own.
module pingpong_ram #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 1024,
  parameter int unsigned NR    = 32,
  parameter int unsigned NW    = 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             sel,
  // compute side, bank sel
  input  logic [AW-1:0]    c_raddr [NR],
  output logic [WIDTH-1:0] c_rdata [NR],
  input  logic             c_we    [NW],
  input  logic [AW-1:0]    c_waddr [NW],
  input  logic [WIDTH-1:0] c_wdata [NW],
  // load/store side, bank !sel
  input  logic [AW-1:0]    d_raddr,
  output logic [WIDTH-1:0] d_rdata,
  input  logic             d_we,
  input  logic [AW-1:0]    d_waddr,
  input  logic [WIDTH-1:0] d_wdata
);
  logic [WIDTH-1:0] mem [2*DEPTH];

  always_ff @(posedge clk) begin
    if (d_we) mem[{~sel, d_waddr}] <= d_wdata;
    for (int p = 0; p < NW; p++) begin
      if (c_we[p]) mem[{sel, c_waddr[p]}] <= c_wdata[p];
    end
  end

  for (genvar p = 0; p < NR; p++) begin : g_rd
    assign c_rdata[p] = mem[{sel, c_raddr[p]}];
  end
  assign d_rdata = mem[{~sel, d_raddr}];
endmodule
