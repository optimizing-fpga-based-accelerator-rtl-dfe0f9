// Full-size run of mss_accel with every parameter at its default.
//
// One exhaustive query (cutoff 0.8, folding level 8, top 20 of a 640-entry
// folded shortlist) over all SCAN = 1.9 million compounds of a database
// generated on the fly (about 1.9 million cycles, under a minute of
// simulation), followed by one HNSW query (M = 20, ef = 20) on a 200-node
// test graph; the HNSW query includes the sweep of the
// 1.9-million-entry visited table after reset. Both result lists are compared
// with the reference searches, and the scan must issue one database read per
// cycle.
module tb_mss_accel_full;
  import mss_pkg::*;
  import mss_tb_pkg::*;
  localparam int N_DB = 1900000, M = 20, K = 20, SCAN = 1900000;

  logic clk = 0, rst_n = 0, start = 0, mode = 0;
  logic [FP_W-1:0] query = '0;
  score_t sc = '0;
  id_t scan_base = '0, ep = '0;
  logic [ID_W:0] scan_len = '0;
  logic [3:0] ep_level = '0;
  logic busy, res_valid, res_last;
  cand_t res_cand;
  logic fdb_req, fdb_rvalid, db_req, db_rvalid, adj_req, adj_rvalid;
  id_t fdb_addr, fdb_rid, db_addr, db_rid;
  logic [FP_W/8-1:0] fdb_rdata;
  cnt_t fdb_rcnt;
  logic [FP_W-1:0] db_rdata;
  logic [31:0] adj_addr;
  logic [ID_W:0] adj_rdata;
  int checks = 0, failures = 0;
  longint cyc = 0, scan_first = -1, scan_last = 0, scan_n = 0;

  always #5 clk = ~clk;

  mss_accel dut (.*);
  mss_mem_model #(.N_DB(N_DB), .MAXDEG(2 * M), .FOLD(8)) u_mem (.*);

  cand_t got[$];
  always @(posedge clk) begin
    cyc++;
    if (res_valid) got.push_back(res_cand);
    if (fdb_req) begin
      if (scan_first < 0) scan_first = cyc;
      scan_last = cyc;
      scan_n++;
    end
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string tag, cand_t ref_r[$]);
    checks++;
    if (got.size() != K) begin failures++; $display("FAIL %s: %0d results", tag, got.size()); end
    for (int i = 0; i < K && i < got.size(); i++) begin
      checks++;
      if (got[i].valid != ref_r[i].valid || (ref_r[i].valid && got[i] != ref_r[i])) begin
        failures++;
        $display("FAIL %s rank %0d: got v%0d s%0d id%0d exp v%0d s%0d id%0d", tag, i, got[i].valid,
                 got[i].score, got[i].id, ref_r[i].valid, ref_r[i].score, ref_r[i].id);
      end
    end
  endtask

  initial begin
    logic [FP_W-1:0] q;
    cand_t ref_r[$], e;
    int kept;
    longint t0;
    build(200, M, 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // Exhaustive query.
    q = fp_of(123457);
    for (int f = 0; f < 12; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
    ref_bbf(q, 3277, 0, SCAN, K, 640, ref_r, kept);
    got.delete();
    @(negedge clk);
    start = 1; mode = 0; query = q; sc = 12'd3277; scan_base = '0; scan_len = (ID_W+1)'(SCAN);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    compare("bbf", ref_r);
    checks++;
    if (scan_n != SCAN || scan_last - scan_first != SCAN - 1) begin
      failures++; $display("FAIL scan: %0d reads over %0d cycles", scan_n, scan_last - scan_first + 1);
    end
    $display("bbf query: %0d compounds, %0d in the BitBound window, %0d cycles, best id %0d score %0d",
             SCAN, kept, cyc - t0, got[0].id, got[0].score);

    // HNSW query.
    q = fp[17];
    for (int f = 0; f < 30; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
    e = ref_top(q, entry, entry_lvl);
    begin
      int nexp;
      ref_base(q, e, 20, K, ref_r, nexp);
    end
    got.delete();
    @(negedge clk);
    start = 1; mode = 1; query = q; ep = id_t'(entry); ep_level = 4'(entry_lvl);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    compare("hnsw", ref_r);
    $display("hnsw query: %0d cycles (with visited-table sweep), best id %0d score %0d",
             cyc - t0, got[0].id, got[0].score);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
