// Molecular similarity search accelerator: top level.
//
// Holds one computing engine of each kind the design offers and runs one
// query at a time on the one selected by 'mode' when 'start' is pulsed:
//   mode 0  exhaustive BitBound & folding search (bbf_engine): scans the
//           folded database range [scan_base, scan_base + scan_len) with
//           similarity cutoff sc, rescores the best K*m*log2(2m) on the full
//           fingerprints, returns the K best;
//   mode 1  approximate HNSW graph search (hnsw_engine) from entry point ep on
//           layer ep_level, returns the K best of the ef found.
// Both return K scored compound indices, best first, on res_valid/res_cand,
// with res_last on the K-th; 'busy' stays high until then.
//
// Off-chip memory is outside this module. Three read ports lead to it: the
// folded database (mode 0), the full 1024-bit fingerprints (used by both
// engines, owned by the engine of the running query) and the HNSW adjacency
// lists (mode 1). Every port takes a request per cycle without back-pressure
// and answers in order; the fingerprint ports echo the requested index.
// In the paper the two engines are separate accelerator builds of the same
// framework, each replicated P times next to the HBM; putting one of each
// behind a mode input, and the port scheme, are this design's choices.
module mss_accel
  import mss_pkg::*;
#(
  parameter int unsigned FOLD   = 8,
  parameter int unsigned K      = 20,
  parameter int unsigned N_DB   = 1900000,
  parameter int unsigned M      = 20,
  parameter int unsigned EF     = 20,
  parameter int unsigned LVL_W  = 4,
  parameter int unsigned ADJ_AW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // query
  input  logic                 start,
  input  logic                 mode,
  input  logic [FP_W-1:0]      query,
  input  score_t               sc,
  input  id_t                  scan_base,
  input  logic [ID_W:0]        scan_len,
  input  id_t                  ep,
  input  logic [LVL_W-1:0]     ep_level,
  output logic                 busy,
  // results
  output logic                 res_valid,
  output logic                 res_last,
  output cand_t                res_cand,
  // folded database port
  output logic                 fdb_req,
  output id_t                  fdb_addr,
  input  logic                 fdb_rvalid,
  input  logic [FP_W/FOLD-1:0] fdb_rdata,
  input  cnt_t                 fdb_rcnt,
  input  id_t                  fdb_rid,
  // full fingerprint port
  output logic                 db_req,
  output id_t                  db_addr,
  input  logic                 db_rvalid,
  input  logic [FP_W-1:0]      db_rdata,
  input  id_t                  db_rid,
  // adjacency port
  output logic                 adj_req,
  output logic [ADJ_AW-1:0]    adj_addr,
  input  logic                 adj_rvalid,
  input  logic [ID_W:0]        adj_rdata
);
  logic mode_r;
  logic go;
  logic e_busy, h_busy;

  assign go = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  mode_r <= 1'b0;
    else if (go) mode_r <= mode;
  end

  // Exhaustive engine.
  logic  e_db_req, e_res_valid, e_res_last;
  id_t   e_db_addr;
  cand_t e_res_cand;

  bbf_engine #(.FOLD(FOLD), .K(K)) u_bbf (
    .clk, .rst_n,
    .start(go && !mode), .query, .sc, .scan_base, .scan_len, .busy(e_busy),
    .fdb_req, .fdb_addr, .fdb_rvalid, .fdb_rdata, .fdb_rcnt, .fdb_rid,
    .db_req(e_db_req), .db_addr(e_db_addr),
    .db_rvalid(db_rvalid && !mode_r), .db_rdata, .db_rid,
    .res_valid(e_res_valid), .res_last(e_res_last), .res_cand(e_res_cand)
  );

  // HNSW engine.
  logic  h_fp_req, h_res_valid, h_res_last;
  id_t   h_fp_addr;
  cand_t h_res_cand;

  hnsw_engine #(.N_DB(N_DB), .M(M), .EF(EF), .K(K), .LVL_W(LVL_W), .ADJ_AW(ADJ_AW)) u_hnsw (
    .clk, .rst_n,
    .start(go && mode), .query, .ep, .ep_level, .busy(h_busy),
    .res_valid(h_res_valid), .res_last(h_res_last), .res_cand(h_res_cand),
    .fp_req(h_fp_req), .fp_addr(h_fp_addr),
    .fp_rvalid(db_rvalid && mode_r), .fp_rdata(db_rdata), .fp_rid(db_rid),
    .adj_req, .adj_addr, .adj_rvalid, .adj_rdata
  );

  assign db_req    = e_db_req | h_fp_req;
  assign db_addr   = mode_r ? h_fp_addr : e_db_addr;
  assign busy      = e_busy || h_busy;
  assign res_valid = e_res_valid | h_res_valid;
  assign res_last  = mode_r ? h_res_last : e_res_last;
  assign res_cand  = mode_r ? h_res_cand : e_res_cand;

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(e_busy && h_busy));
endmodule
