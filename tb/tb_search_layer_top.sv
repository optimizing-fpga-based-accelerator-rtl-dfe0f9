// Self-checking testbench for search_layer_top.
//
// Runs the greedy upper-layer descent on a random four-layer test graph of
// 96 compounds from several start nodes and layers, and compares the entry
// point it returns, and its score, with the reference descent. Also checks
// that a start on layer 0 returns the start node at once, and that a
// neighbour list is read at one adjacency word per cycle.
module tb_search_layer_top;
  import mss_pkg::*;
  import mss_tb_pkg::*;
  localparam int N = 96, M = 4, LVL_W = 4;

  logic clk = 0, rst_n = 0, start = 0;
  logic [FP_W-1:0] query = '0;
  id_t ep = '0;
  logic [LVL_W-1:0] ep_level = '0;
  logic done, busy;
  id_t out_ep;
  score_t out_score;
  logic fp_req, fp_rvalid, adj_req, adj_rvalid;
  id_t fp_addr, fp_rid;
  logic [FP_W-1:0] fp_rdata;
  logic [31:0] adj_addr;
  logic [ID_W:0] adj_rdata;
  int fp_reads, adj_reads;
  int checks = 0, failures = 0;
  int run_len = 0, max_run = 0;

  always #5 clk = ~clk;
  search_layer_top #(.N_DB(N), .M(M), .LVL_W(LVL_W)) dut (.*);
  hnsw_mem_model #(.N_DB(N), .MAXDEG(2 * M)) u_mem (.*);

  always @(posedge clk) begin
    run_len = adj_req ? run_len + 1 : 0;
    if (run_len > max_run) max_run = run_len;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build(N, M, 4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 20; t++) begin
      logic [FP_W-1:0] q;
      cand_t e;
      int s, lv;
      q = fp[$urandom_range(N - 1, 0)];
      for (int f = 0; f < 30; f++) q[$urandom_range(FP_W - 1, 0)] ^= 1'b1;
      if (t < 12) begin s = entry; lv = entry_lvl; end
      else begin s = $urandom_range(N - 1, 0); lv = level[s]; end
      if (t == 19) lv = 0;
      e = ref_top(q, s, lv);
      @(negedge clk);
      start = 1; query = q; ep = id_t'(s); ep_level = LVL_W'(lv);
      @(negedge clk);
      start = 0;
      while (!done) @(posedge clk);
      #1;
      checks += 2;
      if (out_ep != e.id) begin failures++; $display("FAIL t%0d: ep %0d exp %0d", t, out_ep, e.id); end
      if (out_score != e.score) begin failures++; $display("FAIL t%0d: score %0d exp %0d", t, out_score, e.score); end
      $display("descent %0d from %0d (layer %0d): %0d score %0d", t, s, lv, out_ep, out_score);
    end
    checks++;
    if (max_run < 2) begin failures++; $display("FAIL adjacency reads not back to back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
