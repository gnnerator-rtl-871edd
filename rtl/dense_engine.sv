// dense_engine: feature extraction of the accelerator (fully connected layer).
//
// Executes dense_task_t commands. A task multiplies a block of input dimensions of
// node_cnt node features by the matching rows of the weight matrix and adds the result
// to the output features, reloading the output's partial sums from Feature DRAM unless
// the task is the first block, and applying the activation after the last block. This
// partial-sum reload is what the feature-dimension-blocking dataflow needs.
// For every output word t (DIM output dimensions) and every input word r of the block:
//   LOAD_W  weight tile W[(in_tile0+r)*DIM +: DIM][t] from Weight DRAM to the Weight Buffer
//   LOAD_X  input word r of every node from Feature DRAM to the Input Buffer
//   LOAD_P  partial sums (output word t of every node) to the Activations Buffer
//   WSHIFT  DIM cycles shifting the weight tile into the systolic array
//   STREAM  one node per cycle through the array and the activation unit, results back
//           into the Activations Buffer (node_cnt + 2*DIM cycles)
//   STORE   the Activations Buffer back to the output array in Feature DRAM
// Memory layouts: input word of node n, tile k at in_base + n*in_wpn + k; output word t
// of node n at out_base + n*out_tiles + t; weight row i, output word t at
// w_base + i*out_tiles + t. A word is DIM elements of 32 bits, element l in bits
// [32l +: 32]. Units and connections (buffers, array, activation unit, own DRAM
// controller, Activations Buffer reused as partial-sum store) follow the paper's figure;
// the task format, the phase order and running the phases one after another (no
// overlap between loading and computing) are this design's own.
module dense_engine
  import gnn_pkg::*;
#(
  parameter int unsigned DIM   = 64,    // systolic array rows = columns
  parameter int unsigned DEPTH = 8192,  // words per buffer (2 MiB each at DIM = 64)
  localparam int unsigned WIDTH = DIM * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              task_valid,
  output logic              task_ready,
  input  dense_task_t       task_i,
  output logic              task_done,
  // Feature DRAM port
  output logic              f_req_valid,
  input  logic              f_req_ready,
  output logic              f_req_we,
  output logic [ADDR_W-1:0] f_req_addr,
  output logic [WIDTH-1:0]  f_req_wdata,
  input  logic              f_rsp_valid,
  input  logic [WIDTH-1:0]  f_rsp_rdata,
  // Weight DRAM port
  output logic              w_req_valid,
  input  logic              w_req_ready,
  output logic [ADDR_W-1:0] w_req_addr,
  input  logic              w_rsp_valid,
  input  logic [WIDTH-1:0]  w_rsp_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_W, S_LOAD_X, S_LOAD_P, S_WSHIFT, S_STREAM, S_STORE, S_NEXT
  } state_e;
  state_e      state;
  dense_task_t tk;
  logic [15:0] t_q, r_q, k_q, nin_q, nout_q, nw_q;
  logic        sent_q;

  // ---------------- DRAM controller ----------------
  logic              cmd_valid, cmd_ready, cmd_write, cmd_port, dma_done;
  logic [ADDR_W-1:0] cmd_base, cmd_stride;
  logic [15:0]       cmd_count;
  logic              rd_valid;
  logic [15:0]       rd_idx, wr_idx;
  logic [WIDTH-1:0]  rd_data, wr_data;

  dense_dram_ctrl #(.WIDTH(WIDTH), .CNT_W(16)) u_dma (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_port, .cmd_base, .cmd_stride, .cmd_count,
    .done(dma_done), .rd_valid, .rd_idx, .rd_data, .wr_idx, .wr_data,
    .f_req_valid, .f_req_ready, .f_req_we, .f_req_addr, .f_req_wdata, .f_rsp_valid,
    .f_rsp_rdata, .w_req_valid, .w_req_ready, .w_req_addr, .w_rsp_valid, .w_rsp_rdata
  );

  logic is_dma;
  assign is_dma    = (state == S_LOAD_W) || (state == S_LOAD_X) || (state == S_LOAD_P)
                  || (state == S_STORE);
  assign cmd_valid = is_dma && !sent_q;
  assign cmd_write = (state == S_STORE);
  assign cmd_port  = (state == S_LOAD_W);

  always_comb begin
    cmd_base   = '0;
    cmd_stride = '0;
    cmd_count  = tk.node_cnt;
    unique case (state)
      S_LOAD_W: begin
        cmd_base   = tk.w_base + (32'(tk.in_tile0) + 32'(r_q)) * DIM * 32'(tk.out_tiles)
                   + 32'(t_q);
        cmd_stride = 32'(tk.out_tiles);
        cmd_count  = 16'(DIM);
      end
      S_LOAD_X: begin
        cmd_base   = tk.in_base + tk.node_base * 32'(tk.in_wpn) + 32'(tk.in_tile0)
                   + 32'(r_q);
        cmd_stride = 32'(tk.in_wpn);
      end
      S_LOAD_P, S_STORE: begin
        cmd_base   = tk.out_base + tk.node_base * 32'(tk.out_tiles) + 32'(t_q);
        cmd_stride = 32'(tk.out_tiles);
      end
      default: ;
    endcase
  end

  // ---------------- buffers ----------------
  logic [AW-1:0]    w_raddr [1];
  logic [AW-1:0]    x_raddr [1];
  logic [AW-1:0]    a_raddr [2];
  logic [WIDTH-1:0] w_rdata [1];
  logic [WIDTH-1:0] x_rdata [1];
  logic [WIDTH-1:0] a_rdata [2];
  logic             a_we;
  logic [AW-1:0]    a_waddr;
  logic [WIDTH-1:0] a_wdata;

  scratch_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .NRD(1)) u_weight_buf (
    .clk, .we(rd_valid && state == S_LOAD_W), .waddr(AW'(rd_idx)), .wdata(rd_data),
    .raddr(w_raddr), .rdata(w_rdata));
  scratch_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .NRD(1)) u_input_buf (
    .clk, .we(rd_valid && state == S_LOAD_X), .waddr(AW'(rd_idx)), .wdata(rd_data),
    .raddr(x_raddr), .rdata(x_rdata));
  scratch_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .NRD(2)) u_act_buf (
    .clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata), .raddr(a_raddr), .rdata(a_rdata));

  // ---------------- systolic array and activation unit ----------------
  logic        x_valid, y_valid, z_valid;
  elem_t       w_row [DIM];
  elem_t       x_vec [DIM];
  elem_t       y_vec [DIM];
  elem_t       p_vec [DIM];
  elem_t       z_vec [DIM];
  logic [15:0] z_idx;
  logic        add_psum;
  act_e        act_now;

  assign w_raddr[0] = AW'(DIM - 1 - 32'(k_q));
  assign x_raddr[0] = AW'(nin_q);
  assign a_raddr[0] = AW'(nout_q);
  assign a_raddr[1] = AW'(wr_idx);
  assign wr_data    = a_rdata[1];

  for (genvar l = 0; l < DIM; l++) begin : g_unpack
    assign w_row[l] = w_rdata[0][l*DATA_W +: DATA_W];
    assign x_vec[l] = x_rdata[0][l*DATA_W +: DATA_W];
    assign p_vec[l] = a_rdata[0][l*DATA_W +: DATA_W];
  end

  assign x_valid  = (state == S_STREAM) && (nin_q != tk.node_cnt);
  assign add_psum = !(tk.first && r_q == 16'd0);
  assign act_now  = (tk.last && r_q == tk.in_tiles - 16'd1) ? tk.act : ACT_NONE;

  systolic_array #(.ROWS(DIM), .COLS(DIM)) u_array (
    .clk, .rst_n, .w_load(state == S_WSHIFT), .w_row, .x_valid, .x_vec, .y_valid, .y_vec);

  activation_unit #(.LANES(DIM), .IDX_W(16)) u_act (
    .clk, .rst_n, .in_valid(y_valid), .in_idx(nout_q), .y(y_vec), .psum(p_vec),
    .add_psum, .act(act_now), .out_valid(z_valid), .out_idx(z_idx), .z(z_vec));

  always_comb begin
    a_we    = 1'b0;
    a_waddr = AW'(rd_idx);
    a_wdata = rd_data;
    if (state == S_LOAD_P) begin
      a_we = rd_valid;
    end else if (state == S_STREAM) begin
      a_we    = z_valid;
      a_waddr = AW'(z_idx);
      for (int l = 0; l < DIM; l++) a_wdata[l*DATA_W +: DATA_W] = z_vec[l];
    end
  end

  // ---------------- sequencer ----------------
  assign task_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; tk <= '0; t_q <= '0; r_q <= '0; k_q <= '0;
      nin_q <= '0; nout_q <= '0; nw_q <= '0; sent_q <= 1'b0; task_done <= 1'b0;
    end else begin
      task_done <= 1'b0;
      if (cmd_valid && cmd_ready) sent_q <= 1'b1;
      unique case (state)
        S_IDLE: if (task_valid) begin
          tk <= task_i; t_q <= '0; r_q <= '0; sent_q <= 1'b0;
          state <= S_LOAD_W;
        end
        S_LOAD_W: if (sent_q && dma_done) begin
          sent_q <= 1'b0;
          state  <= S_LOAD_X;
        end
        S_LOAD_X: if (sent_q && dma_done) begin
          sent_q <= 1'b0;
          k_q    <= '0;
          state  <= add_psum ? S_LOAD_P : S_WSHIFT;
        end
        S_LOAD_P: if (sent_q && dma_done) begin
          sent_q <= 1'b0;
          k_q    <= '0;
          state  <= S_WSHIFT;
        end
        S_WSHIFT: begin
          k_q <= k_q + 1'b1;
          if (k_q == 16'(DIM - 1)) begin
            nin_q <= '0; nout_q <= '0; nw_q <= '0;
            state <= S_STREAM;
          end
        end
        S_STREAM: begin
          if (x_valid) nin_q <= nin_q + 1'b1;
          if (y_valid) nout_q <= nout_q + 1'b1;
          if (z_valid) nw_q <= nw_q + 1'b1;
          if (nw_q + 16'(z_valid) == tk.node_cnt) begin
            sent_q <= 1'b0;
            state  <= S_STORE;
          end
        end
        S_STORE: if (sent_q && dma_done) begin
          sent_q <= 1'b0;
          state  <= S_NEXT;
        end
        default: begin // S_NEXT
          if (r_q + 16'd1 < tk.in_tiles) begin
            r_q   <= r_q + 1'b1;
            state <= S_LOAD_W;
          end else if (t_q + 16'd1 < tk.out_tiles) begin
            r_q   <= '0;
            t_q   <= t_q + 1'b1;
            state <= S_LOAD_W;
          end else begin
            task_done <= 1'b1;
            state     <= S_IDLE;
          end
        end
      endcase
    end
  end
endmodule
