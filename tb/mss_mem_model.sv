// Behavioural model of the off-chip memory behind mss_accel: the folded
// database port, the full-fingerprint port and the adjacency port. Each
// answers every request LAT cycles later, in order. Fingerprints come from
// mss_tb_pkg::fp_of(), so any database size is served without storage; the
// folded word is the OR of the FOLD sections and carries the bit count of
// the full fingerprint. Adjacency words come from the package's test graph.
module mss_mem_model
  import mss_pkg::*;
  import mss_tb_pkg::*;
#(
  parameter int N_DB   = 64,
  parameter int MAXDEG = 8,
  parameter int FOLD   = 8,
  parameter int ADJ_AW = 32,
  parameter int LAT    = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 fdb_req,
  input  id_t                  fdb_addr,
  output logic                 fdb_rvalid,
  output logic [FP_W/FOLD-1:0] fdb_rdata,
  output cnt_t                 fdb_rcnt,
  output id_t                  fdb_rid,
  input  logic                 db_req,
  input  id_t                  db_addr,
  output logic                 db_rvalid,
  output logic [FP_W-1:0]      db_rdata,
  output id_t                  db_rid,
  input  logic                 adj_req,
  input  logic [ADJ_AW-1:0]    adj_addr,
  output logic                 adj_rvalid,
  output logic [ID_W:0]        adj_rdata
);
  localparam int FW = FP_W / FOLD;
  logic [LAT-1:0] fv, dv, av;
  id_t fa [LAT];
  id_t da [LAT];
  logic [ADJ_AW-1:0] aa [LAT];

  always_ff @(posedge clk) begin
    fv <= rst_n ? {fv[LAT-2:0], fdb_req} : '0;
    dv <= rst_n ? {dv[LAT-2:0], db_req} : '0;
    av <= rst_n ? {av[LAT-2:0], adj_req} : '0;
    fa[0] <= fdb_addr; da[0] <= db_addr; aa[0] <= adj_addr;
    for (int i = 1; i < LAT; i++) begin
      fa[i] <= fa[i-1]; da[i] <= da[i-1]; aa[i] <= aa[i-1];
    end
  end

  function automatic logic [FW-1:0] fold(logic [FP_W-1:0] x);
    logic [FW-1:0] r;
    r = '0;
    for (int s = 0; s < FOLD; s++) r |= x[s*FW +: FW];
    return r;
  endfunction

  function automatic logic [ID_W:0] adj_word(logic [ADJ_AW-1:0] a);
    longint w = longint'(a);
    int slot = int'(w % MAXDEG);
    int node = int'((w / MAXDEG) % N_DB);
    int lay  = int'(w / (longint'(MAXDEG) * N_DB));
    int e;
    if (node >= n_nodes || lay >= nlvl || slot >= maxdeg) return '0;
    e = nb(lay, node, slot);
    return (e < 0) ? '0 : {1'b1, id_t'(e)};
  endfunction

  logic [FP_W-1:0] fx;
  always_comb fx = fp_of(int'(fa[LAT-1]));

  assign fdb_rvalid = fv[LAT-1];
  assign fdb_rid    = fa[LAT-1];
  assign fdb_rdata  = fold(fx);
  assign fdb_rcnt   = cnt_t'($countones(fx));
  assign db_rvalid  = dv[LAT-1];
  assign db_rid     = da[LAT-1];
  assign db_rdata   = fp_of(int'(da[LAT-1]));
  assign adj_rvalid = av[LAT-1];
  assign adj_rdata  = adj_word(aa[LAT-1]);
endmodule
