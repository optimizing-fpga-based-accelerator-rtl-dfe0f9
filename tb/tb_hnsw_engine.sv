// Self-checking testbench for hnsw_engine.
//
// Builds a random three-layer test graph of 64 compounds (mss_tb_pkg), serves
// it from a behavioural memory, and runs queries from the graph's entry
// point. Each streamed result list is compared entry by entry with the
// reference descent plus base-layer search computed by the package.
module tb_hnsw_engine;
  import mss_pkg::*;
  import mss_tb_pkg::*;
  localparam int N = 64, M = 4, EF = 8, K = 4, LVL_W = 4;

  logic clk = 0, rst_n = 0, start = 0;
  logic [FP_W-1:0] query = '0;
  id_t ep = '0;
  logic [LVL_W-1:0] ep_level = '0;
  logic busy, res_valid, res_last;
  cand_t res_cand;
  logic fp_req, fp_rvalid, adj_req, adj_rvalid;
  id_t fp_addr, fp_rid;
  logic [FP_W-1:0] fp_rdata;
  logic [31:0] adj_addr;
  logic [ID_W:0] adj_rdata;
  int fp_reads, adj_reads;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hnsw_engine #(.N_DB(N), .M(M), .EF(EF), .K(K), .LVL_W(LVL_W)) dut (.*);
  hnsw_mem_model #(.N_DB(N), .MAXDEG(2 * M)) u_mem (.*);

  cand_t got[$];
  always @(posedge clk) if (res_valid) got.push_back(res_cand);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build(N, M, 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 12; t++) begin
      logic [FP_W-1:0] q;
      cand_t e, ref_r[$];
      int exp_n;
      q = fp[$urandom_range(N - 1, 0)];
      for (int f = 0; f < 30; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
      e = ref_top(q, entry, entry_lvl);
      ref_base(q, e, EF, K, ref_r, exp_n);
      got.delete();
      @(negedge clk);
      start = 1; query = q; ep = id_t'(entry); ep_level = LVL_W'(entry_lvl);
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
          $display("FAIL q%0d rank %0d: got s%0d id%0d exp s%0d id%0d", t, i,
                   got[i].score, got[i].id, ref_r[i].score, ref_r[i].id);
        end
      end
      $display("query %0d: entry %0d -> base entry %0d, %0d expansions, best id %0d score %0d",
               t, entry, e.id, exp_n, got.size() ? got[0].id : -1, got.size() ? got[0].score : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
