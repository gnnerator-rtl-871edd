// graph_engine_ctrl: the Graph Engine Controller.
//
// Walks the shard grid of one aggregation pass in the feature-dimension-blocked,
// destination-major order: for each dimension block b, for each destination interval
// (column) c, for each source interval s, shard (s, c). It pipelines the four units with
// the double-buffered scratchpads in lock-step steps. In step j the Shard Compute Unit
// aggregates shard j-1 from the compute banks while, on the other banks, the loader
//   1. writes back the column that was finished in step j-1 (Shard Writeback Unit),
//   2. waits for load_allow (the accelerator controller's stall in dense-first mode),
//   3. loads shard j's edge list and source features together (Shard Edge Fetch and
//      Shard Feature Fetch Units),
//   4. if shard j opens a column, loads that column's destination features.
// A step ends when both sides are finished, then the banks swap. Edge and source banks
// alternate every shard; destination banks alternate every column, so destination
// aggregates stay on chip for a whole column and are written back once.
// col_done pulses after each column write-back (col_cnt counts them); done pulses when
// the last column is written. Order, destination-stationary traversal, dimension
// blocking and double buffering are the paper's; the lock-step schedule is this
// design's own.
module graph_engine_ctrl
  import gnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  ge_cfg_t           cfg,
  output logic              busy,
  output logic              done,
  // accelerator controller
  output logic              load_req,
  output logic [15:0]       load_need,  // highest interval whose features the load reads
  input  logic              load_allow,
  output logic              col_done,
  output logic [31:0]       col_cnt,
  // bank selects (compute-side bank)
  output logic              esel,
  output logic              dsel,
  // shard edge fetch unit
  output logic              ef_start,
  output logic [ADDR_W-1:0] ef_idx_addr,
  input  logic              ef_done,
  input  logic [31:0]       ef_edge_count,
  // shard feature fetch unit
  output logic              ff_start,
  output logic              ff_to_dst,
  output logic [31:0]       ff_node_base,
  output logic [15:0]       ff_node_cnt,
  output logic [15:0]       ff_word_off,
  input  logic              ff_done,
  // shard writeback unit
  output logic              wb_start,
  output logic [31:0]       wb_node_base,
  output logic [15:0]       wb_node_cnt,
  output logic [15:0]       wb_word_off,
  input  logic              wb_done,
  // shard compute unit
  output logic              sc_start,
  output logic [31:0]       sc_edge_count,
  input  logic              sc_done
);
  typedef enum logic [2:0] {L_WB, L_GATE, L_ES, L_DST, L_DONE} lphase_e;
  typedef enum logic [1:0] {S_IDLE, S_BEGIN, S_RUN} state_e;

  state_e  state;
  lphase_e lph;
  ge_cfg_t cfg_q;

  // load cursor (shard j) and the shard being computed (j-1)
  logic [15:0] lb, lc, ls, cb, cc, cs, wbb, wbc;
  logic        l_valid, c_valid, wb_pend, lpar, cpar, wpar, jpar;
  logic        comp_busy, lstarted, ef_ok, ff_ok;
  logic [31:0] c_edges;

  function automatic logic [31:0] ibase(logic [15:0] i, logic [15:0] n);
    return 32'(i) * 32'(n);
  endfunction
  function automatic logic [15:0] icnt(logic [15:0] i, logic [15:0] n, logic [31:0] v);
    logic [31:0] b;
    b = 32'(i) * 32'(n);
    if (b >= v) return 16'd0;
    if (v - b < 32'(n)) return 16'(v - b);
    return n;
  endfunction

  assign busy      = (state != S_IDLE);
  assign esel      = ~jpar;
  assign dsel      = c_valid ? cpar : (wb_pend ? ~wpar : ~lpar);
  assign load_req  = (state == S_RUN) && (lph == L_GATE);
  assign load_need = (ls > lc) ? ls : lc;

  assign ef_idx_addr  = cfg_q.edge_tab_base + 32'd2 * (32'(lc) * 32'(cfg_q.grid) + 32'(ls));
  assign ff_to_dst    = (lph == L_DST);
  assign ff_node_base = ibase(ff_to_dst ? lc : ls, cfg_q.shard_n);
  assign ff_node_cnt  = icnt(ff_to_dst ? lc : ls, cfg_q.shard_n, cfg_q.num_nodes);
  assign ff_word_off  = 16'(32'(lb) * 32'(cfg_q.wpb));
  assign wb_node_base = ibase(wbc, cfg_q.shard_n);
  assign wb_node_cnt  = icnt(wbc, cfg_q.shard_n, cfg_q.num_nodes);
  assign wb_word_off  = 16'(32'(wbb) * 32'(cfg_q.wpb));
  assign sc_edge_count = c_edges;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; lph <= L_DONE; cfg_q <= '0;
      lb <= '0; lc <= '0; ls <= '0; cb <= '0; cc <= '0; cs <= '0; wbb <= '0; wbc <= '0;
      l_valid <= 1'b0; c_valid <= 1'b0; wb_pend <= 1'b0;
      lpar <= 1'b0; cpar <= 1'b0; wpar <= 1'b0; jpar <= 1'b0;
      comp_busy <= 1'b0; lstarted <= 1'b0; ef_ok <= 1'b0; ff_ok <= 1'b0; c_edges <= '0;
      done <= 1'b0; col_done <= 1'b0; col_cnt <= '0;
      ef_start <= 1'b0; ff_start <= 1'b0; wb_start <= 1'b0; sc_start <= 1'b0;
    end else begin
      done <= 1'b0; col_done <= 1'b0;
      ef_start <= 1'b0; ff_start <= 1'b0; wb_start <= 1'b0; sc_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          lb <= '0; lc <= '0; ls <= '0;
          l_valid <= (cfg.grid != 16'd0) && (cfg.nblk != 16'd0);
          c_valid <= 1'b0; wb_pend <= 1'b0;
          lpar <= 1'b0; jpar <= 1'b0; col_cnt <= '0;
          state <= S_BEGIN;
        end
        S_BEGIN: begin
          if (c_valid) begin
            sc_start  <= 1'b1;
            comp_busy <= 1'b1;
          end
          lstarted <= 1'b0; ef_ok <= 1'b0; ff_ok <= 1'b0;
          lph   <= wb_pend ? L_WB : (l_valid ? L_GATE : L_DONE);
          state <= S_RUN;
        end
        default: begin // S_RUN
          if (sc_done) comp_busy <= 1'b0;
          unique case (lph)
            L_WB: begin
              if (!lstarted) begin
                wb_start <= 1'b1; lstarted <= 1'b1;
              end else if (wb_done) begin
                col_done <= 1'b1;
                col_cnt  <= col_cnt + 1'b1;
                wb_pend  <= 1'b0;
                lstarted <= 1'b0;
                lph      <= l_valid ? L_GATE : L_DONE;
              end
            end
            L_GATE: if (load_allow) lph <= L_ES;
            L_ES: begin
              if (!lstarted) begin
                ef_start <= 1'b1; ff_start <= 1'b1; lstarted <= 1'b1;
              end else begin
                if (ef_done) ef_ok <= 1'b1;
                if (ff_done) ff_ok <= 1'b1;
                if ((ef_ok || ef_done) && (ff_ok || ff_done)) begin
                  lstarted <= 1'b0;
                  lph <= (ls == 16'd0) ? L_DST : L_DONE;
                end
              end
            end
            L_DST: begin
              if (!lstarted) begin
                ff_start <= 1'b1; lstarted <= 1'b1;
              end else if (ff_done) begin
                lstarted <= 1'b0;
                lph <= L_DONE;
              end
            end
            default: ; // L_DONE
          endcase
          // end of step: both sides finished
          if (lph == L_DONE && !comp_busy && !sc_start) begin
            // the column of the computed shard is complete: write it back next step
            if (c_valid && cs == cfg_q.grid - 16'd1) begin
              wb_pend <= 1'b1; wbb <= cb; wbc <= cc; wpar <= cpar;
            end
            c_valid <= l_valid;
            cc <= lc; cs <= ls; cpar <= lpar; c_edges <= ef_edge_count;
            cb <= lb;
            jpar <= ~jpar;
            if (l_valid) begin
              if (ls + 16'd1 < cfg_q.grid) begin
                ls <= ls + 1'b1;
              end else begin
                ls <= '0;
                lpar <= ~lpar;
                if (lc + 16'd1 < cfg_q.grid) begin
                  lc <= lc + 1'b1;
                end else begin
                  lc <= '0;
                  if (lb + 16'd1 < cfg_q.nblk) lb <= lb + 1'b1;
                  else l_valid <= 1'b0;
                end
              end
            end
            if (!l_valid && !c_valid && !wb_pend) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_BEGIN;
            end
          end
        end
      endcase
    end
  end
endmodule
