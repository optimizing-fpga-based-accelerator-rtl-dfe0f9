// HNSW computing engine (approximate search).
//
// SEARCH-LAYER-TOP descends the upper layers of the graph from the global
// entry point to the closest node it can reach on layer 1, and passes that
// node and its score to SEARCH-LAYER-BASE, which searches the base layer with
// its two EF-sized priority queues and streams out the K best compounds. Both
// units have their own TFC, as in the paper; they run one after the other
// for a query, so they share one fingerprint port and one adjacency port, and
// the responses go to whichever unit is running.
//
// Defaults follow the design point the paper reports at 0.92 recall
// (M = 20, ef = 20) and its Top-20 result; LVL_W, N_DB and the ports are this
// design's choices (see search_layer_top for the port rules and adjacency
// layout).
module hnsw_engine
  import mss_pkg::*;
#(
  parameter int unsigned N_DB   = 1900000,
  parameter int unsigned M      = 20,
  parameter int unsigned EF     = 20,
  parameter int unsigned K      = 20,
  parameter int unsigned LVL_W  = 4,
  parameter int unsigned ADJ_AW = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [FP_W-1:0]   query,
  input  id_t               ep,
  input  logic [LVL_W-1:0]  ep_level,
  output logic              busy,
  output logic              res_valid,
  output logic              res_last,
  output cand_t             res_cand,
  output logic              fp_req,
  output id_t               fp_addr,
  input  logic              fp_rvalid,
  input  logic [FP_W-1:0]   fp_rdata,
  input  id_t               fp_rid,
  output logic              adj_req,
  output logic [ADJ_AW-1:0] adj_addr,
  input  logic              adj_rvalid,
  input  logic [ID_W:0]     adj_rdata
);
  logic   top_done, top_busy, base_busy, base_start;
  id_t    top_ep;
  score_t top_score;
  logic   phase_base;            // 0: top unit owns the ports
  logic [FP_W-1:0] q_r;

  logic              t_fp_req, b_fp_req, t_adj_req, b_adj_req;
  id_t               t_fp_addr, b_fp_addr;
  logic [ADJ_AW-1:0] t_adj_addr, b_adj_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_base <= 1'b0;
      base_start <= 1'b0;
      q_r        <= '0;
    end else begin
      base_start <= top_done;
      if (start && !busy) begin
        q_r        <= query;
        phase_base <= 1'b0;
      end
      if (top_done) phase_base <= 1'b1;
    end
  end

  search_layer_top #(.N_DB(N_DB), .M(M), .MAXDEG(2 * M), .LVL_W(LVL_W), .ADJ_AW(ADJ_AW)) u_top (
    .clk, .rst_n, .start(start && !busy), .query, .ep, .ep_level,
    .done(top_done), .out_ep(top_ep), .out_score(top_score), .busy(top_busy),
    .fp_req(t_fp_req), .fp_addr(t_fp_addr),
    .fp_rvalid(fp_rvalid && !phase_base), .fp_rdata, .fp_rid,
    .adj_req(t_adj_req), .adj_addr(t_adj_addr),
    .adj_rvalid(adj_rvalid && !phase_base), .adj_rdata
  );

  search_layer_base #(.N_DB(N_DB), .M(M), .MAXDEG(2 * M), .EF(EF), .K(K), .ADJ_AW(ADJ_AW)) u_base (
    .clk, .rst_n, .start(base_start), .query(q_r), .ep(top_ep), .ep_score(top_score),
    .busy(base_busy), .res_valid, .res_last, .res_cand,
    .fp_req(b_fp_req), .fp_addr(b_fp_addr),
    .fp_rvalid(fp_rvalid && phase_base), .fp_rdata, .fp_rid,
    .adj_req(b_adj_req), .adj_addr(b_adj_addr),
    .adj_rvalid(adj_rvalid && phase_base), .adj_rdata
  );

  assign fp_req   = t_fp_req | b_fp_req;
  assign fp_addr  = phase_base ? b_fp_addr : t_fp_addr;
  assign adj_req  = t_adj_req | b_adj_req;
  assign adj_addr = phase_base ? b_adj_addr : t_adj_addr;
  assign busy     = top_busy || base_busy || base_start || top_done;

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
                 !(t_fp_req && b_fp_req) && !(t_adj_req && b_adj_req));
endmodule
