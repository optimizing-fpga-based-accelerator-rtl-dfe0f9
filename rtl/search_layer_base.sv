// SEARCH-LAYER-BASE: best-first HNSW search of the base graph layer.
//
// Starting from the entry point found by SEARCH-LAYER-TOP, the unit keeps two
// register-array priority queues of EF entries: C, the candidates still to
// expand, and R, the EF closest compounds found so far. Each round pops the
// closest candidate from C; if it is further from the query than the furthest
// entry of R the search stops. Otherwise the candidate's base-layer list (up
// to 2M neighbours) is read; every neighbour not yet visited is marked
// visited, its fingerprint is fetched and scored by the unit's TFC, and it
// enters both C and R if it is closer than R's furthest entry or R holds
// fewer than EF entries (R then drops its furthest entry if it overflows).
// At the end the K best entries of R leave on the res_* stream, best first,
// res_last on the K-th; the sorted queue makes this the final top-K.
// This is the paper's SEARCH-LAYER-BASE algorithm with its two EF-sized
// queues and one TFC.
//
// This design's choices: C is bounded to EF entries like R, so a push into a
// full C drops C's furthest candidate; the visited set is an on-chip table of
// one EPW-bit query tag per compound, so no clearing is needed between queries
// except on the first query after reset and once every 2^EPW - 1 queries
// after that (an N_DB-cycle sweep); neighbour
// handling is streamed (adjacency read, visited check one cycle later,
// fingerprint read, TFC, queue update, one neighbour per cycle). Memory ports
// and the adjacency layout are those of search_layer_top. The adjacency
// address keeps the full ADJ_AW width of that shared memory map although
// base-layer addresses (below N_DB * MAXDEG, 76 million at the defaults)
// leave its top bits at zero.
module search_layer_base
  import mss_pkg::*;
#(
  parameter int unsigned N_DB    = 1900000,
  parameter int unsigned M       = 20,
  parameter int unsigned MAXDEG  = 2 * M,
  parameter int unsigned EF      = 20,
  parameter int unsigned K       = 20,
  parameter int unsigned EPW     = 8,
  parameter int unsigned ADJ_AW  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [FP_W-1:0]   query,
  input  id_t               ep,
  input  score_t            ep_score,
  output logic              busy,
  // results
  output logic              res_valid,
  output logic              res_last,
  output cand_t             res_cand,
  // fingerprint port
  output logic              fp_req,
  output id_t               fp_addr,
  input  logic              fp_rvalid,
  input  logic [FP_W-1:0]   fp_rdata,
  input  id_t               fp_rid,
  // adjacency port
  output logic              adj_req,
  output logic [ADJ_AW-1:0] adj_addr,
  input  logic              adj_rvalid,
  input  logic [ID_W:0]     adj_rdata     // {valid, id}
);
  localparam int unsigned SW  = $clog2(MAXDEG + 1);
  localparam int unsigned KW  = $clog2(K + 1);
  localparam int unsigned QSW = $clog2(EF + 1);
  localparam int unsigned VAW = (N_DB > 1) ? $clog2(N_DB) : 1;

  typedef enum logic [2:0] {B_IDLE, B_CLEAR, B_INIT, B_POP, B_SCAN, B_OUT} bstate_e;
  bstate_e state;

  logic [FP_W-1:0] q_r;
  id_t             cur;
  logic [SW-1:0]   slot, resp;
  logic [7:0]      pend;
  logic            list_end;
  logic [EPW-1:0]  epoch;
  logic [VAW-1:0]  clr_addr;
  logic [KW-1:0]   out_idx;
  id_t             ep_r;
  score_t          ep_s_r;

  // ---- visited table: one query tag per compound -----------------------
  logic [EPW-1:0]  vis [N_DB];
  logic [EPW-1:0]  vis_rd;
  logic            vis_we;
  logic [VAW-1:0]  vis_wa;
  logic [EPW-1:0]  vis_wd;

  // Stage 1: adjacency word registered while its tag is read.
  logic  s1_valid;
  id_t   s1_id;

  always_ff @(posedge clk) begin
    vis_rd <= vis[VAW'(adj_rdata[ID_W-1:0])];
    if (vis_we) vis[vis_wa] <= vis_wd;
  end

  logic nb_new;
  assign nb_new = s1_valid && (vis_rd != epoch);

  always_comb begin
    vis_we = 1'b0;
    vis_wa = VAW'(s1_id);
    vis_wd = epoch;
    if (state == B_CLEAR) begin
      vis_we = 1'b1;
      vis_wa = clr_addr;
      vis_wd = '0;
    end else if (state == B_INIT) begin
      vis_we = 1'b1;
      vis_wa = VAW'(ep_r);
    end else if (nb_new) begin
      vis_we = 1'b1;
    end
  end

  // ---- priority queues ---------------------------------------------------
  logic   c_push, c_pop, r_push, r_pop;
  cand_t  c_best, c_worst, r_best, r_worst, new_cand;
  logic [QSW-1:0] c_size, r_size;
  logic   c_full, r_full, q_clr;

  prio_queue #(.N(EF)) u_cand (
    .clk, .rst_n, .clr(q_clr), .push(c_push), .push_data(new_cand),
    .pop_best(c_pop), .pop_worst(1'b0),
    .best(c_best), .worst(c_worst), .size(c_size), .full(c_full)
  );
  prio_queue #(.N(EF)) u_res (
    .clk, .rst_n, .clr(q_clr), .push(r_push), .push_data(new_cand),
    .pop_best(r_pop), .pop_worst(1'b0),
    .best(r_best), .worst(r_worst), .size(r_size), .full(r_full)
  );

  // ---- TFC ---------------------------------------------------------------
  logic  t_valid, t_last;
  cand_t t_cand;
  tfc #(.W(FP_W), .FILTER(1'b0)) u_tfc (
    .clk, .rst_n, .query(q_r), .lw_bd('0), .up_bd('1),
    .in_valid(fp_rvalid && busy), .in_last(1'b0), .in_fp(fp_rdata), .in_cnt('0),
    .in_id(fp_rid),
    .out_valid(t_valid), .out_last(t_last), .out_cand(t_cand)
  );

  assign fp_req   = nb_new;
  assign fp_addr  = s1_id;
  assign adj_req  = (state == B_SCAN) && (slot < SW'(MAXDEG)) && !list_end;
  assign adj_addr = ADJ_AW'(cur) * ADJ_AW'(MAXDEG) + ADJ_AW'(slot);   // layer 0

  // Queue control.
  logic accept;
  assign accept = t_valid && (!r_full || t_cand.score > r_worst.score);

  always_comb begin
    q_clr    = (state == B_IDLE) && start;
    c_push   = 1'b0;
    r_push   = 1'b0;
    c_pop    = 1'b0;
    r_pop    = 1'b0;
    new_cand = t_cand;
    case (state)
      B_INIT: begin
        c_push = 1'b1;
        r_push = 1'b1;
        new_cand.valid = 1'b1;
        new_cand.score = ep_s_r;
        new_cand.id    = ep_r;
      end
      B_POP: c_pop = (c_size != '0) && !(c_best.score < r_worst.score);
      B_SCAN: begin
        c_push = accept;
        r_push = accept;
      end
      B_OUT: r_pop = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE; q_r <= '0; cur <= '0; slot <= '0; resp <= '0; pend <= '0;
      list_end <= 1'b0; epoch <= '1; clr_addr <= '0; out_idx <= '0;
      ep_r <= '0; ep_s_r <= '0; s1_valid <= 1'b0; s1_id <= '0;
      res_valid <= 1'b0; res_last <= 1'b0; res_cand <= '0;
    end else begin
      res_valid <= 1'b0;
      res_last  <= 1'b0;
      pend      <= pend + 8'(fp_req) - 8'(t_valid);
      s1_valid  <= (state == B_SCAN) && adj_rvalid && adj_rdata[ID_W] && !list_end;
      s1_id     <= adj_rdata[ID_W-1:0];
      case (state)
        B_IDLE: if (start) begin
          q_r    <= query;
          ep_r   <= ep;
          ep_s_r <= ep_score;
          epoch  <= epoch + 1'b1;
          if (epoch == {EPW{1'b1}}) begin   // tag space wrapped: sweep table
            clr_addr <= '0;
            state    <= B_CLEAR;
          end else begin
            state <= B_INIT;
          end
        end
        B_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == VAW'(N_DB - 1)) begin
            epoch <= 1;
            state <= B_INIT;
          end
        end
        B_INIT: state <= B_POP;
        B_POP: begin
          if (c_pop) begin
            cur      <= c_best.id;
            slot     <= '0;
            resp     <= '0;
            list_end <= 1'b0;
            state    <= B_SCAN;
          end else begin
            out_idx <= '0;
            state   <= B_OUT;
          end
        end
        B_SCAN: begin
          if (adj_req) slot <= slot + 1'b1;
          if (adj_rvalid) begin
            resp <= resp + 1'b1;
            if (!adj_rdata[ID_W]) list_end <= 1'b1;
          end
          if (!adj_req && resp == slot && !s1_valid && !adj_rvalid &&
              pend + 8'(fp_req) - 8'(t_valid) == '0)
            state <= B_POP;
        end
        default: begin  // B_OUT
          res_valid <= 1'b1;
          res_cand  <= r_best;
          res_last  <= (out_idx == KW'(K - 1));
          out_idx   <= out_idx + 1'b1;
          if (out_idx == KW'(K - 1)) state <= B_IDLE;
        end
      endcase
    end
  end

  assign busy = (state != B_IDLE);

  a_no_last:    assert property (@(posedge clk) disable iff (!rst_n) !t_last);
  a_k_le_ef:    assert property (@(posedge clk) K <= EF);
endmodule
