// dense_pe: one processing element of the Dense Engine's systolic array.
//
// Weight-stationary cell. The stationary weight is loaded through a vertical shift
// chain (w_in from the cell above, w_out to the cell below) while w_load is high. Every
// cycle the cell registers the input feature element arriving from the left (passed on
// to the right one cycle later) and the partial sum arriving from above plus
// weight * input (passed down one cycle later). The grid of PEs and its left-to-right
// and top-to-bottom flow follow the paper's figure of the Dense Engine; the
// weight-stationary choice and integer arithmetic are this design's own.
// Latency: one cycle from x_in/psum_in to x_out/psum_out.
module dense_pe
  import gnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  elem_t w_in,
  output elem_t w_out,
  input  elem_t x_in,
  output elem_t x_out,
  input  elem_t psum_in,
  output elem_t psum_out
);
  elem_t w_q, x_q, p_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q <= '0;
      x_q <= '0;
      p_q <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      x_q <= x_in;
      p_q <= psum_in + w_q * x_in;
    end
  end

  assign w_out    = w_q;
  assign x_out    = x_q;
  assign psum_out = p_q;
endmodule
