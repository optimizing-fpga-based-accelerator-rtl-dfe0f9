// BitBound & folding computing engine (exhaustive search), II=1.
//
// One query at a time is searched against a database in two passes, the
// two-stage folding search:
//
//  1. Folded pass. BitCnt counts the bits of the query Q, which sets the
//     BitBound window cnt(Q)*Sc <= cnt(X) <= cnt(Q)/Sc for similarity cutoff
//     Sc. The fold unit ORs the query's FOLD sections together. The engine
//     then streams the folded database entries [scan_base, scan_base+scan_len)
//     from the folded-database port, one per cycle; each word carries the
//     folded fingerprint and the bit count of the uncompressed fingerprint.
//     TFC 1 drops entries outside the window and scores the rest on the folded
//     fingerprints, and Top-K merge sort 1 keeps the KR1 best.
//  2. Rescoring pass. Each index Top-K 1 streams out is fetched at once from
//     the full-fingerprint port and scored by TFC 2 on the 1024-bit
//     fingerprints; Top-K merge sort 2 keeps the K best, which leave on the
//     res_* stream (best first, res_last on the K-th).
//
// Fetch, scoring and sorting are cascaded so that each pass takes one
// database entry per cycle; this on-the-fly pipeline, the BitCnt / TFC /
// Top-K split, the folding scheme, the Top-20 search, the default folding
// level 8 and KR1 = K * m * log2(2m) follow the paper. The memory ports, the
// bound arithmetic and the one-query-at-a-time control are this design's.
//
// Memory ports: a request (req, addr) is always accepted; the response
// (rvalid, rdata, rid = addr of the request) comes back later, in order.
// Sc is an unsigned fraction of 4096 (0.8 is 3277); Sc = 0 disables the
// bound (brute force).
module bbf_engine
  import mss_pkg::*;
#(
  parameter int unsigned FOLD = 8,
  parameter int unsigned K    = 20,
  parameter int unsigned KR1  = K * FOLD * $clog2(2 * FOLD)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // Query
  input  logic                 start,
  input  logic [FP_W-1:0]      query,
  input  score_t               sc,
  input  id_t                  scan_base,
  input  logic [ID_W:0]        scan_len,
  output logic                 busy,
  // Folded database port
  output logic                 fdb_req,
  output id_t                  fdb_addr,
  input  logic                 fdb_rvalid,
  input  logic [FP_W/FOLD-1:0] fdb_rdata,
  input  cnt_t                 fdb_rcnt,
  input  id_t                  fdb_rid,
  // Full-fingerprint database port
  output logic                 db_req,
  output id_t                  db_addr,
  input  logic                 db_rvalid,
  input  logic [FP_W-1:0]      db_rdata,
  input  id_t                  db_rid,
  // Results
  output logic                 res_valid,
  output logic                 res_last,
  output cand_t                res_cand
);
  localparam int unsigned FW = FP_W / FOLD;

  typedef enum logic [2:0] {E_IDLE, E_CNT, E_BOUND, E_SCAN, E_WAIT} estate_e;
  estate_e state;

  logic [FP_W-1:0] q_r;
  logic [FW-1:0]   qf;
  score_t          sc_r;
  cnt_t            lw_bd, up_bd;
  logic            qc_valid;
  cnt_t            cnt_q;
  logic [ID_W:0]   issued1, resp1, len_r;
  id_t             next_addr;

  // BitCnt of the query.
  bitcnt #(.W(FP_W)) u_bitcnt (
    .clk, .rst_n, .in_valid(start && state == E_IDLE), .in_data(query),
    .out_valid(qc_valid), .out_cnt(cnt_q)
  );

  fold_unit #(.L(FP_W), .M(FOLD)) u_fold (.fp_in(q_r), .fp_out(qf));

  // BitBound window from the query bit count:
  // lw = ceil(cnt(Q) * Sc), up = floor(cnt(Q) / Sc), Sc in units of 2^-12.
  localparam int unsigned PBW = CNT_W + SCORE_W;
  cnt_t           lw_nxt, up_nxt;
  logic [PBW-1:0] prod, quot;
  always_comb begin
    prod   = PBW'(cnt_q) * PBW'(sc_r);
    lw_nxt = CNT_W'((prod + PBW'((1 << SCORE_W) - 1)) >> SCORE_W);
    quot   = (sc_r == '0) ? PBW'(FP_W) : (PBW'(cnt_q) << SCORE_W) / PBW'(sc_r);
    up_nxt = (quot > PBW'(FP_W)) ? CNT_W'(FP_W) : CNT_W'(quot);
  end

  // Stage-1 scan issue.
  assign fdb_req  = (state == E_SCAN) && (issued1 < len_r);
  assign fdb_addr = next_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; issued1 <= '0; resp1 <= '0; len_r <= '0;
      next_addr <= '0; lw_bd <= '0; up_bd <= '0; sc_r <= '0; q_r <= '0;
    end else begin
      case (state)
        E_IDLE: if (start) begin
          q_r       <= query;
          sc_r      <= sc;
          len_r     <= scan_len;
          next_addr <= scan_base;
          issued1   <= '0;
          resp1     <= '0;
          state     <= E_CNT;
        end
        E_CNT: if (qc_valid) begin
          lw_bd <= lw_nxt;
          up_bd <= up_nxt;
          state <= E_BOUND;
        end
        E_BOUND: state <= E_SCAN;
        E_SCAN: begin
          if (fdb_req) begin
            issued1   <= issued1 + 1'b1;
            next_addr <= next_addr + 1'b1;
          end
          if (fdb_rvalid) resp1 <= resp1 + 1'b1;
          if (issued1 == len_r && (resp1 + (ID_W+1)'(fdb_rvalid)) == len_r) state <= E_WAIT;
        end
        default: if (res_valid && res_last) state <= E_IDLE;  // E_WAIT
      endcase
    end
  end

  assign busy = (state != E_IDLE);

  // TFC 1 on folded fingerprints, with the BitBound filter.
  logic  t1_valid, t1_last, t1_in_last;
  cand_t t1_cand;
  assign t1_in_last = (state == E_SCAN) && issued1 == len_r &&
                      (resp1 + (ID_W+1)'(fdb_rvalid)) == len_r;

  tfc #(.W(FW), .FILTER(1'b1)) u_tfc1 (
    .clk, .rst_n, .query(qf), .lw_bd, .up_bd,
    .in_valid(fdb_rvalid), .in_last(t1_in_last), .in_fp(fdb_rdata),
    .in_cnt(fdb_rcnt), .in_id(fdb_rid),
    .out_valid(t1_valid), .out_last(t1_last), .out_cand(t1_cand)
  );

  logic  k1_valid, k1_last, k1_busy;
  cand_t k1_cand;
  topk_merge #(.K(KR1)) u_topk1 (
    .clk, .rst_n, .in_valid(t1_valid), .in_last(t1_last), .in_cand(t1_cand),
    .out_valid(k1_valid), .out_last(k1_last), .out_cand(k1_cand), .busy(k1_busy)
  );

  // Stage 2: fetch full fingerprints of the returned indices.
  logic [ID_W:0] issued2, resp2;
  logic          idx_done;
  logic          t2_in_last;
  assign db_req  = k1_valid && k1_cand.valid;
  assign db_addr = k1_cand.id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued2 <= '0; resp2 <= '0; idx_done <= 1'b0;
    end else if (t2_in_last) begin
      issued2 <= '0; resp2 <= '0; idx_done <= 1'b0;
    end else begin
      if (db_req)    issued2 <= issued2 + 1'b1;
      if (db_rvalid) resp2   <= resp2 + 1'b1;
      if (k1_valid && k1_last) idx_done <= 1'b1;
    end
  end

  assign t2_in_last = idx_done && !db_req &&
                      (resp2 + (ID_W+1)'(db_rvalid)) == issued2;

  logic  t2_valid, t2_last;
  cand_t t2_cand;
  tfc #(.W(FP_W), .FILTER(1'b0)) u_tfc2 (
    .clk, .rst_n, .query(q_r), .lw_bd('0), .up_bd('1),
    .in_valid(db_rvalid), .in_last(t2_in_last), .in_fp(db_rdata),
    .in_cnt('0), .in_id(db_rid),
    .out_valid(t2_valid), .out_last(t2_last), .out_cand(t2_cand)
  );

  logic k2_busy;
  topk_merge #(.K(K)) u_topk2 (
    .clk, .rst_n, .in_valid(t2_valid), .in_last(t2_last), .in_cand(t2_cand),
    .out_valid(res_valid), .out_last(res_last), .out_cand(res_cand), .busy(k2_busy)
  );

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                  start |-> state == E_IDLE && !k1_busy && !k2_busy);
endmodule
