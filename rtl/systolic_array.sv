// systolic_array: the Dense Engine's two-dimensional matrix multiplication unit.
//
// A ROWS x COLS grid of weight-stationary dense_pe cells (64 x 64 by default, the
// array width the paper gives). Weights enter at the top: each cycle with w_load high
// shifts w_row into row 0 and every row down by one, so after ROWS such cycles row r
// holds the vector that was presented at load cycle ROWS-1-r (feed W row ROWS-1 first).
// An input vector x_vec (one node's feature block, ROWS elements) enters from the left
// with x_valid; the array skews it so that row i sees it i cycles later, and deskews the
// column results so that y_vec = x_vec * W (COLS elements, y[c] = sum_i x[i]*W[i][c])
// leaves at the bottom, all columns together, exactly LAT = ROWS + COLS - 1 cycles after
// x_valid. One vector can be accepted every cycle. Weights must not be reloaded while
// vectors are in flight. Skewing registers and the deskew are this design's own.
module systolic_array
  import gnn_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  elem_t w_row [COLS],
  input  logic  x_valid,
  input  elem_t x_vec [ROWS],
  output logic  y_valid,
  output elem_t y_vec [COLS]
);
  localparam int unsigned LAT = ROWS + COLS - 1;

  elem_t wv [ROWS+1][COLS];   // weight chain, wv[r] enters row r
  elem_t xh [ROWS][COLS+1];   // horizontal input chain
  elem_t pv [ROWS+1][COLS];   // vertical partial-sum chain

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign wv[0][c] = w_row[c];
    assign pv[0][c] = '0;
  end

  // input skew: row i delayed by i cycles
  for (genvar i = 0; i < ROWS; i++) begin : g_skew
    if (i == 0) begin : g_nodly
      assign xh[0][0] = x_vec[0];
    end else begin : g_dly
      elem_t sr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < i; k++) sr[k] <= '0;
        end else begin
          sr[0] <= x_vec[i];
          for (int k = 1; k < i; k++) sr[k] <= sr[k-1];
        end
      end
      assign xh[i][0] = sr[i-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      dense_pe u_pe (
        .clk, .rst_n, .w_load,
        .w_in (wv[r][c]),   .w_out (wv[r+1][c]),
        .x_in (xh[r][c]),   .x_out (xh[r][c+1]),
        .psum_in (pv[r][c]), .psum_out (pv[r+1][c])
      );
    end
  end

  // output deskew: column c leaves the array at ROWS + c, delay it by COLS-1-c
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    localparam int unsigned D = COLS - 1 - c;
    if (D == 0) begin : g_nodly
      assign y_vec[c] = pv[ROWS][c];
    end else begin : g_dly
      elem_t sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) sr[k] <= '0;
        end else begin
          sr[0] <= pv[ROWS][c];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
        end
      end
      assign y_vec[c] = sr[D-1];
    end
  end

  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], x_valid};
  end
  assign y_valid = vpipe[LAT-1];
endmodule
