// Self-checking testbench for search_layer_base.
//
// Runs the base-layer best-first search on a random test graph of 80
// compounds from random entry points and compares the K = 6 results it
// streams with the reference search (EF = 8 queues), for several queries in a
// row. EPW = 2 makes the query tag wrap, so the visited-table sweep runs
// again mid-test and the results after it must still match.
module tb_search_layer_base;
  import mss_pkg::*;
  import mss_tb_pkg::*;
  localparam int N = 80, M = 4, EF = 8, K = 6;

  logic clk = 0, rst_n = 0, start = 0;
  logic [FP_W-1:0] query = '0;
  id_t ep = '0;
  score_t ep_score = '0;
  logic busy, res_valid, res_last;
  cand_t res_cand;
  logic fp_req, fp_rvalid, adj_req, adj_rvalid;
  id_t fp_addr, fp_rid;
  logic [FP_W-1:0] fp_rdata;
  logic [31:0] adj_addr;
  logic [ID_W:0] adj_rdata;
  int fp_reads, adj_reads;
  int checks = 0, failures = 0, sweeps = 0;

  always #5 clk = ~clk;
  search_layer_base #(.N_DB(N), .M(M), .EF(EF), .K(K), .EPW(2)) dut (.*);
  hnsw_mem_model #(.N_DB(N), .MAXDEG(2 * M)) u_mem (.*);

  cand_t got[$];
  always @(posedge clk) if (res_valid) got.push_back(res_cand);
  always @(posedge clk) if (rst_n && dut.state == 3'd1 && dut.clr_addr == 0) sweeps++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build(N, M, 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 10; t++) begin
      logic [FP_W-1:0] q;
      cand_t e, ref_r[$];
      int s, nexp;
      q = fp[$urandom_range(N - 1, 0)];
      for (int f = 0; f < 30; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
      s = $urandom_range(N - 1, 0);
      e = '{valid: 1'b1, score: tani(q, fp[s]), id: id_t'(s)};
      ref_base(q, e, EF, K, ref_r, nexp);
      got.delete();
      @(negedge clk);
      start = 1; query = q; ep = id_t'(s); ep_score = e.score;
      @(negedge clk);
      start = 0;
      while (busy) @(posedge clk);
      repeat (2) @(posedge clk);
      checks++;
      if (got.size() != K) begin failures++; $display("FAIL q%0d: %0d results", t, got.size()); end
      for (int i = 0; i < K && i < got.size(); i++) begin
        checks++;
        if (got[i] != ref_r[i]) begin
          failures++;
          $display("FAIL q%0d rank %0d: got v%0d s%0d id%0d exp v%0d s%0d id%0d", t, i, got[i].valid,
                   got[i].score, got[i].id, ref_r[i].valid, ref_r[i].score, ref_r[i].id);
        end
      end
      $display("query %0d from %0d: %0d expansions, best %0d score %0d", t, s, nexp, got[0].id, got[0].score);
    end
    checks++;
    if (sweeps < 2) begin failures++; $display("FAIL visited sweep ran %0d times", sweeps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
