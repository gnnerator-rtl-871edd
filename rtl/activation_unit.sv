// activation_unit: the one-dimensional unit below the systolic array.
//
// For every result vector leaving the array (LANES elements) it optionally adds a
// partial sum reloaded from memory, which is how a feature extraction split into
// dimension blocks accumulates across blocks, and then optionally applies ReLU (only
// after the last block). The paper places the unit after the array and names ReLU as
// its example; folding the partial-sum addition into it is this design's choice.
// One vector per cycle, one cycle of latency; idx travels with the vector.
module activation_unit
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned IDX_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  elem_t            y    [LANES],
  input  elem_t            psum [LANES],
  input  logic             add_psum,
  input  act_e             act,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output elem_t            z    [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      for (int l = 0; l < LANES; l++) z[l] <= '0;
    end else begin
      out_valid <= in_valid;
      out_idx   <= in_idx;
      for (int l = 0; l < LANES; l++) begin
        automatic elem_t s = y[l] + (add_psum ? psum[l] : elem_t'(0));
        z[l] <= (act == ACT_RELU && s < 0) ? elem_t'(0) : s;
      end
    end
  end
endmodule
