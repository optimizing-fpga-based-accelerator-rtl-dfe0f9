// SEARCH-LAYER-TOP: greedy HNSW descent through the upper graph layers.
//
// Starting from the graph's entry point at layer ep_level, the unit repeats
// for each layer down to layer 1: read the adjacency list of the current
// node C at that layer, score every neighbour against the query with its own
// TFC, and move C to the best-scoring neighbour if that one is closer than C;
// when a whole list gives no closer neighbour, drop one layer. The final C
// and its score are the entry point handed to the base-layer search. This is
// the paper's SEARCH-LAYER-TOP algorithm with one TFC.
//
// Neighbour processing is streamed: adjacency reads are issued one per
// cycle, each returned neighbour id immediately issues its fingerprint read,
// and each returned fingerprint enters the TFC, so a list of n neighbours
// costs about n + memory latency + 15 cycles.
//
// Adjacency memory layout (this design's choice): the list of node v at
// layer l occupies words ((l * N_DB) + v) * MAXDEG + j, j < MAXDEG; a word is
// {valid, neighbour id} and the list ends at the first invalid word or after
// M words on the upper layers (2M on the base layer, which this unit does not
// read). Memory ports accept every request and answer in order; the
// fingerprint port echoes the requested id.
module search_layer_top
  import mss_pkg::*;
#(
  parameter int unsigned N_DB    = 1900000,
  parameter int unsigned M       = 20,
  parameter int unsigned MAXDEG  = 2 * M,
  parameter int unsigned LVL_W   = 4,
  parameter int unsigned ADJ_AW  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [FP_W-1:0]   query,
  input  id_t               ep,
  input  logic [LVL_W-1:0]  ep_level,
  output logic              done,
  output id_t               out_ep,
  output score_t            out_score,
  output logic              busy,
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
  localparam int unsigned SW = $clog2(MAXDEG + 1);

  typedef enum logic [2:0] {T_IDLE, T_EP, T_EPWAIT, T_LAYER, T_SCAN, T_NEXT} tstate_e;
  tstate_e state;

  logic [FP_W-1:0]  q_r;
  logic [LVL_W-1:0] layer;
  id_t              cur, best;
  score_t           cur_s, best_s;
  logic [SW-1:0]    slot, resp;
  logic [7:0]       pend;          // fingerprints issued, score not yet back
  logic             list_end;      // an invalid word was returned

  logic  t_valid;
  cand_t t_cand;
  logic  t_last;
  logic  nb_req;

  assign nb_req  = (state == T_SCAN) && adj_rvalid && adj_rdata[ID_W] && !list_end;
  assign fp_req  = (state == T_EP) || nb_req;
  assign fp_addr = (state == T_EP) ? cur : adj_rdata[ID_W-1:0];

  assign adj_req  = (state == T_SCAN) && (slot < SW'(M)) && !list_end;
  assign adj_addr = ((ADJ_AW'(layer) * ADJ_AW'(N_DB)) + ADJ_AW'(cur)) * ADJ_AW'(MAXDEG)
                    + ADJ_AW'(slot);

  tfc #(.W(FP_W), .FILTER(1'b0)) u_tfc (
    .clk, .rst_n, .query(q_r), .lw_bd('0), .up_bd('1),
    .in_valid(fp_rvalid && busy), .in_last(1'b0), .in_fp(fp_rdata), .in_cnt('0),
    .in_id(fp_rid),
    .out_valid(t_valid), .out_last(t_last), .out_cand(t_cand)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; q_r <= '0; layer <= '0; cur <= '0; best <= '0;
      cur_s <= '0; best_s <= '0; slot <= '0; resp <= '0; pend <= '0;
      list_end <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      pend <= pend + 8'(fp_req) - 8'(t_valid);
      case (state)
        T_IDLE: if (start) begin
          q_r   <= query;
          cur   <= ep;
          layer <= ep_level;
          state <= T_EP;
        end
        T_EP: state <= T_EPWAIT;
        T_EPWAIT: if (t_valid) begin
          cur_s <= t_cand.score;
          state <= T_LAYER;
        end
        T_LAYER: begin
          if (layer == '0) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end else begin
            best     <= cur;
            best_s   <= cur_s;
            slot     <= '0;
            resp     <= '0;
            list_end <= 1'b0;
            state    <= T_SCAN;
          end
        end
        T_SCAN: begin
          if (adj_req) slot <= slot + 1'b1;
          if (adj_rvalid) begin
            resp <= resp + 1'b1;
            if (!adj_rdata[ID_W]) list_end <= 1'b1;
          end
          // Keep the closest neighbour seen so far.
          if (t_valid && t_cand.score > best_s) begin
            best   <= t_cand.id;
            best_s <= t_cand.score;
          end
          if (!adj_req && resp + SW'(adj_rvalid) == slot &&
              pend + 8'(fp_req) - 8'(t_valid) == '0)
            state <= T_NEXT;
        end
        default: begin  // T_NEXT
          if (best != cur) begin
            cur   <= best;
            cur_s <= best_s;
          end else begin
            layer <= layer - 1'b1;
          end
          state <= T_LAYER;
        end
      endcase
    end
  end

  assign busy      = (state != T_IDLE);
  assign out_ep    = cur;
  assign out_score = cur_s;

  a_no_last: assert property (@(posedge clk) disable iff (!rst_n) !t_last);
endmodule
