// scratch_ram: single-bank on-chip scratchpad used for the Dense Engine's Input,
// Weight and Activations Buffers.
//
// DEPTH words of WIDTH bits, one synchronous write port and NRD asynchronous
// (same-cycle) read ports. The paper sizes the Dense Engine's on-chip memory at 6 MiB
// in total; splitting it into three 2 MiB buffers (8192 words of 64 x 32 bits each) is
// this design's choice. The paper's buffers are double-buffered; here the Dense Engine
// uses one bank and runs its load, compute and store phases one after another.
module scratch_ram #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 2048,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rdata[p] = mem[raddr[p]];
  end
endmodule
