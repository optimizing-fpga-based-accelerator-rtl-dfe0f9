// End-to-end testbench for mss_accel at reduced sizes.
//
// Serves a 64-node, three-layer test graph and a procedurally generated
// database from a behavioural memory and alternates exhaustive
// (BitBound & folding) and HNSW queries, comparing every result list with the
// reference searches of mss_tb_pkg. It counts how often each mechanism of the
// design acted and fails if one never did: the BitBound window dropping
// entries, Top-K padding of a partial last run, rescoring of the folded
// shortlist, the descent moving the entry point on an upper layer, the base
// search stopping early with candidates left, a push into a full candidate
// queue, the visited-table sweep and a switch between the two modes.
module tb_mss_accel;
  import mss_pkg::*;
  import mss_tb_pkg::*;
  localparam int N_DB = 4096, M = 4, EF = 8, K = 8, FOLD = 8, LVL_W = 4;
  localparam int KR1 = K * FOLD * 4;

  logic clk = 0, rst_n = 0, start = 0, mode = 0;
  logic [FP_W-1:0] query = '0;
  score_t sc = '0;
  id_t scan_base = '0, ep = '0;
  logic [ID_W:0] scan_len = '0;
  logic [LVL_W-1:0] ep_level = '0;
  logic busy, res_valid, res_last;
  cand_t res_cand;
  logic fdb_req, fdb_rvalid, db_req, db_rvalid, adj_req, adj_rvalid;
  id_t fdb_addr, fdb_rid, db_addr, db_rid;
  logic [FP_W/FOLD-1:0] fdb_rdata;
  cnt_t fdb_rcnt;
  logic [FP_W-1:0] db_rdata;
  logic [31:0] adj_addr;
  logic [ID_W:0] adj_rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mss_accel #(.FOLD(FOLD), .K(K), .N_DB(N_DB), .M(M), .EF(EF), .LVL_W(LVL_W)) dut (.*);
  mss_mem_model #(.N_DB(N_DB), .MAXDEG(2 * M), .FOLD(FOLD)) u_mem (.*);

  // Mechanism counters, sampled inside the design.
  int n_filtered = 0, n_pad = 0, n_rescore = 0, n_descend = 0, n_early = 0;
  int n_cfull = 0, n_sweep = 0, n_switch = 0;
  always @(posedge clk) if (rst_n) begin
    if (fdb_rvalid && !(dut.u_bbf.u_tfc1.keep)) n_filtered++;
    if (dut.u_bbf.u_topk1.fstate == 2'd1) n_pad++;
    if (db_req && !dut.mode_r) n_rescore++;
    if (dut.u_hnsw.u_top.state == 3'd5 && dut.u_hnsw.u_top.best != dut.u_hnsw.u_top.cur) n_descend++;
    if (dut.u_hnsw.u_base.state == 3'd3 && dut.u_hnsw.u_base.c_size != 0 && !dut.u_hnsw.u_base.c_pop) n_early++;
    if (dut.u_hnsw.u_base.c_push && dut.u_hnsw.u_base.c_full) n_cfull++;
    if (dut.u_hnsw.u_base.state == 3'd1) n_sweep++;
  end

  cand_t got[$];
  always @(posedge clk) if (res_valid) got.push_back(res_cand);

  initial begin
    repeat (2000000) @(posedge clk);
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

  task automatic run(logic md, logic [FP_W-1:0] q, int sc_i, int base, int len);
    cand_t ref_r[$];
    int aux;
    if (md) begin
      cand_t e;
      e = ref_top(q, entry, entry_lvl);
      ref_base(q, e, EF, K, ref_r, aux);
    end else begin
      ref_bbf(q, sc_i, base, len, K, KR1, ref_r, aux);
    end
    got.delete();
    @(negedge clk);
    if (md != mode) n_switch++;
    start = 1; mode = md; query = q; sc = score_t'(sc_i);
    scan_base = id_t'(base); scan_len = (ID_W+1)'(len);
    ep = id_t'(entry); ep_level = LVL_W'(entry_lvl);
    @(negedge clk);
    start = 0;
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    compare(md ? "hnsw" : "bbf", ref_r);
    $display("%s query: best id %0d score %0d", md ? "hnsw" : "bbf ",
             got.size() ? got[0].id : -1, got.size() ? got[0].score : 0);
  endtask

  initial begin
    build(64, M, 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 6; t++) begin
      logic [FP_W-1:0] q;
      q = fp_of($urandom_range(N_DB - 1, 0));
      for (int f = 0; f < 20; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
      run(1'b0, q, (t % 2) ? 3277 : 1638, 0, 1000 + 37 * t);
      q = fp[$urandom_range(63, 0)];
      for (int f = 0; f < 30; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
      run(1'b1, q, 0, 0, 0);
    end
    $display("mechanisms: filtered=%0d pad=%0d rescore=%0d descend=%0d early_stop=%0d cfull=%0d sweep=%0d switch=%0d",
             n_filtered, n_pad, n_rescore, n_descend, n_early, n_cfull, n_sweep, n_switch);
    checks += 8;
    if (n_filtered == 0) begin failures++; $display("FAIL BitBound filter never dropped"); end
    if (n_pad == 0)      begin failures++; $display("FAIL Top-K padding never used"); end
    if (n_rescore == 0)  begin failures++; $display("FAIL no rescoring reads"); end
    if (n_descend == 0)  begin failures++; $display("FAIL upper-layer descent never moved"); end
    if (n_early == 0)    begin failures++; $display("FAIL base search never stopped early"); end
    if (n_cfull == 0)    begin failures++; $display("FAIL candidate queue never full"); end
    if (n_sweep == 0)    begin failures++; $display("FAIL visited sweep never ran"); end
    if (n_switch == 0)   begin failures++; $display("FAIL mode never switched"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
