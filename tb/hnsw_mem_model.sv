// Behavioural model of the graph memory seen by the HNSW units: a
// fingerprint port and an adjacency port, each answering every request after
// LAT cycles, in order, from the test graph held in mss_tb_pkg. Adjacency
// words are {valid, id}, at ((layer * N_DB) + node) * MAXDEG + slot.
module hnsw_mem_model
  import mss_pkg::*;
  import mss_tb_pkg::*;
#(
  parameter int N_DB   = 64,
  parameter int MAXDEG = 8,
  parameter int ADJ_AW = 32,
  parameter int LAT    = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fp_req,
  input  id_t               fp_addr,
  output logic              fp_rvalid,
  output logic [FP_W-1:0]   fp_rdata,
  output id_t               fp_rid,
  input  logic              adj_req,
  input  logic [ADJ_AW-1:0] adj_addr,
  output logic              adj_rvalid,
  output logic [ID_W:0]     adj_rdata,
  output int                fp_reads,
  output int                adj_reads
);
  logic [LAT-1:0] fv, av;
  id_t fa [LAT];
  logic [ADJ_AW-1:0] aa [LAT];

  always_ff @(posedge clk) begin
    fv <= rst_n ? {fv[LAT-2:0], fp_req} : '0;
    av <= rst_n ? {av[LAT-2:0], adj_req} : '0;
    fa[0] <= fp_addr;
    aa[0] <= adj_addr;
    for (int i = 1; i < LAT; i++) begin fa[i] <= fa[i-1]; aa[i] <= aa[i-1]; end
    if (!rst_n) begin fp_reads <= 0; adj_reads <= 0; end
    else begin
      fp_reads  <= fp_reads + int'(fp_req);
      adj_reads <= adj_reads + int'(adj_req);
    end
  end

  function automatic logic [ID_W:0] adj_word(logic [ADJ_AW-1:0] a);
    longint w = longint'(a);
    int slot = int'(w % MAXDEG);
    int node = int'((w / MAXDEG) % N_DB);
    int lay  = int'(w / (MAXDEG * N_DB));
    int e;
    if (node >= n_nodes || lay >= nlvl || slot >= maxdeg) return '0;
    e = nb(lay, node, slot);
    return (e < 0) ? '0 : {1'b1, id_t'(e)};
  endfunction

  assign fp_rvalid  = fv[LAT-1];
  assign fp_rid     = fa[LAT-1];
  assign fp_rdata   = (int'(fa[LAT-1]) < n_nodes) ? fp[fa[LAT-1]] : '0;
  assign adj_rvalid = av[LAT-1];
  assign adj_rdata  = adj_word(aa[LAT-1]);
endmodule
