// Self-checking testbench for bbf_engine.
//
// Builds a random database of DB fingerprints with bit densities spread so
// that the BitBound window removes some of them, keeps it in a behavioural
// memory with a fixed read latency, and runs queries with cutoffs 0.8, 0.4
// and 0 (brute force). The expected result is computed independently: the
// folded fingerprints and the window test, the KR1 best folded scores, then
// the K best full scores among those, with the same 12-bit score formula.
// The scan pass must take one entry per cycle: the folded port is checked to
// issue scan_len requests on consecutive cycles.
module tb_bbf_engine;
  import mss_pkg::*;
  localparam int FOLD = 8;
  localparam int K    = 4;
  localparam int KR1  = 16;
  localparam int DB   = 300;
  localparam int FW   = FP_W / FOLD;
  localparam int LAT  = 4;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [FP_W-1:0] query = '0;
  score_t sc = '0;
  id_t scan_base = '0;
  logic [ID_W:0] scan_len = '0;
  logic busy;
  logic fdb_req, fdb_rvalid, db_req, db_rvalid;
  id_t fdb_addr, fdb_rid, db_addr, db_rid;
  logic [FW-1:0] fdb_rdata;
  cnt_t fdb_rcnt;
  logic [FP_W-1:0] db_rdata;
  logic res_valid, res_last;
  cand_t res_cand;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bbf_engine #(.FOLD(FOLD), .K(K), .KR1(KR1)) dut (.*);

  logic [FP_W-1:0] mem [DB];

  function automatic logic [FW-1:0] fold(logic [FP_W-1:0] x);
    logic [FW-1:0] r = '0;
    for (int s = 0; s < FOLD; s++) r |= x[s*FW +: FW];
    return r;
  endfunction

  function automatic score_t tani(int i, int u);
    if (u == 0) return '0;
    if (i >= u) return '1;
    return score_t'((i * 4096) / u);
  endfunction

  // Behavioural memories: fixed latency, in order.
  logic [LAT-1:0] fv, dv;
  id_t fa [LAT];
  id_t da [LAT];
  always_ff @(posedge clk) begin
    fv <= rst_n ? {fv[LAT-2:0], fdb_req} : '0;
    dv <= rst_n ? {dv[LAT-2:0], db_req} : '0;
    fa[0] <= fdb_addr; da[0] <= db_addr;
    for (int i = 1; i < LAT; i++) begin fa[i] <= fa[i-1]; da[i] <= da[i-1]; end
  end
  assign fdb_rvalid = fv[LAT-1] && rst_n;
  assign fdb_rid    = fa[LAT-1];
  assign fdb_rdata  = fold(mem[fa[LAT-1] % DB]);
  assign fdb_rcnt   = cnt_t'($countones(mem[fa[LAT-1] % DB]));
  assign db_rvalid  = dv[LAT-1] && rst_n;
  assign db_rid     = da[LAT-1];
  assign db_rdata   = mem[da[LAT-1] % DB];

  cand_t got[$];
  always @(posedge clk) if (res_valid) got.push_back(res_cand);

  // Scan-rate monitor.
  int req_first, req_last, req_n;
  always @(posedge clk) if (fdb_req) begin
    if (req_n == 0) req_first = $time / 10;
    req_last = $time / 10;
    req_n++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [FP_W-1:0] rand_fp(int dens);
    logic [FP_W-1:0] x = '0;
    for (int b = 0; b < FP_W; b++) x[b] = ($urandom_range(999, 0) < dens);
    return x;
  endfunction

  task automatic run_query(logic [FP_W-1:0] q, int sc_i, int base, int len);
    cand_t s1[$], top1[$], s2[$], ref_r[$];
    int cq, lw, up;
    cq = $countones(q);
    lw = (cq * sc_i + 4095) / 4096;
    up = (sc_i == 0) ? 2047 : (cq * 4096) / sc_i;
    for (int j = base; j < base + len; j++) begin
      int c = $countones(mem[j]);
      if (c >= lw && c <= up) begin
        cand_t e;
        e.valid = 1; e.id = id_t'(j);
        e.score = tani($countones(fold(q) & fold(mem[j])), $countones(fold(q) | fold(mem[j])));
        s1.push_back(e);
      end
    end
    for (int k = 0; k < KR1 && s1.size() > 0; k++) begin
      int bi = 0;
      for (int j = 1; j < s1.size(); j++) if (cand_better(s1[j], s1[bi])) bi = j;
      top1.push_back(s1[bi]); s1.delete(bi);
    end
    foreach (top1[i]) begin
      cand_t e;
      e.valid = 1; e.id = top1[i].id;
      e.score = tani($countones(q & mem[e.id]), $countones(q | mem[e.id]));
      s2.push_back(e);
    end
    for (int k = 0; k < K; k++) begin
      int bi = 0;
      if (s2.size() == 0) begin ref_r.push_back('0); continue; end
      for (int j = 1; j < s2.size(); j++) if (cand_better(s2[j], s2[bi])) bi = j;
      ref_r.push_back(s2[bi]); s2.delete(bi);
    end
    got.delete();
    req_n = 0;
    @(negedge clk);
    start = 1; query = q; sc = score_t'(sc_i); scan_base = id_t'(base); scan_len = (ID_W+1)'(len);
    @(negedge clk);
    start = 0;
    while (busy) @(posedge clk);
    @(posedge clk);
    checks++;
    if (got.size() != K) begin failures++; $display("FAIL: %0d results", got.size()); end
    for (int k = 0; k < K && k < got.size(); k++) begin
      checks++;
      if (got[k].valid != ref_r[k].valid || (ref_r[k].valid && got[k] != ref_r[k])) begin
        failures++;
        $display("FAIL rank %0d: got v%0d s%0d id%0d exp v%0d s%0d id%0d", k, got[k].valid,
                 got[k].score, got[k].id, ref_r[k].valid, ref_r[k].score, ref_r[k].id);
      end
    end
    checks++;
    if (req_n != len || (len > 0 && req_last - req_first != len - 1)) begin
      failures++; $display("FAIL scan rate: %0d requests over %0d cycles", req_n, req_last - req_first + 1);
    end
    $display("query sc=%0d len=%0d: window [%0d,%0d], best id %0d score %0d", sc_i, len, lw, up,
             got.size() ? got[0].id : -1, got.size() ? got[0].score : 0);
  endtask

  initial begin
    for (int j = 0; j < DB; j++) mem[j] = rand_fp(20 + (j % 10) * 12);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    begin
      logic [FP_W-1:0] q;
      q = mem[37];
      q[5] = ~q[5];
      run_query(q, 3277, 0, DB);          // Sc = 0.8
    end
    run_query(mem[123] | rand_fp(10), 1638, 0, DB);  // Sc = 0.4
    run_query(rand_fp(60), 0, 0, DB);                 // brute force
    run_query(mem[200], 3277, 150, 100);              // sub-range
    run_query(rand_fp(500), 3686, 0, 50);             // window rejects most
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
