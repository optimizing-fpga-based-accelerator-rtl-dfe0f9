// Self-checking testbench for topk_merge.
//
// Streams scans of random scored compounds (some back to back at one per
// cycle, some with gaps, lengths that are and are not multiples of the run
// length, and an empty scan) and compares the streamed result with a
// reference top-K computed by selection in the testbench. Also checks that
// the input is never refused (II=1) and that the result starts within
// N + 2*KP + 8*log2(KP) cycles of the first input.
module tb_topk_merge;
  import mss_pkg::*;
  localparam int K  = 20;
  localparam int KP = 32;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  cand_t in_cand = '0;
  logic out_valid, out_last, busy;
  cand_t out_cand;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  topk_merge #(.K(K)) dut (.*);

  cand_t ref_q[$];
  cand_t got_q[$];

  always @(posedge clk) if (out_valid) got_q.push_back(out_cand);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_scan(int n, int gap_pct, int score_max);
    cand_t items[$];
    int t0, t1;
    items.delete();
    got_q.delete();
    for (int i = 0; i < n; i++) begin
      cand_t c;
      c.valid = 1'b1;
      c.score = score_t'($urandom_range(score_max, 0));
      c.id    = id_t'(i * 7 + 3);
      items.push_back(c);
    end
    // Reference: repeated selection of the best remaining.
    ref_q.delete();
    begin
      cand_t pool[$] = items;
      for (int k = 0; k < K; k++) begin
        int bi = -1;
        for (int j = 0; j < pool.size(); j++)
          if (bi < 0 || cand_better(pool[j], pool[bi])) bi = j;
        if (bi >= 0) begin ref_q.push_back(pool[bi]); pool.delete(bi); end
        else ref_q.push_back('0);
      end
    end
    t0 = -1;
    for (int i = 0; i < n; i++) begin
      while ($urandom_range(99, 0) < gap_pct) begin
        @(negedge clk); in_valid = 0;
      end
      @(negedge clk);
      in_valid = 1; in_cand = items[i]; in_last = (i == n - 1);
      if (t0 < 0) t0 = $time / 10;
    end
    if (n == 0) begin @(negedge clk); in_last = 1; t0 = $time / 10; end
    @(negedge clk); in_valid = 0; in_last = 0;
    while (got_q.size() == 0) @(posedge clk);
    t1 = $time / 10;
    while (busy || got_q.size() < K) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (got_q.size() != K) begin
      failures++; $display("FAIL n=%0d: got %0d results", n, got_q.size());
    end
    for (int k = 0; k < K && k < got_q.size(); k++) begin
      checks++;
      if (got_q[k].valid != ref_q[k].valid ||
          (ref_q[k].valid && got_q[k] != ref_q[k])) begin
        failures++;
        $display("FAIL n=%0d rank %0d: got v%0d s%0d id%0d exp v%0d s%0d id%0d", n, k,
                 got_q[k].valid, got_q[k].score, got_q[k].id,
                 ref_q[k].valid, ref_q[k].score, ref_q[k].id);
      end
    end
    if (gap_pct == 0) begin
      checks++;
      if (t1 - t0 > n + 2 * KP + 8 * $clog2(KP)) begin
        failures++; $display("FAIL latency n=%0d took %0d", n, t1 - t0);
      end
      $display("scan n=%0d: first result %0d cycles after first input", n, t1 - t0);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_scan(100, 0, 4095);
    run_scan(64, 0, 4095);
    run_scan(5, 0, 4095);
    run_scan(0, 0, 4095);
    run_scan(1000, 0, 4095);
    run_scan(333, 30, 50);     // many ties, gaps
    run_scan(2000, 0, 20);
    run_scan(77, 60, 4095);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
