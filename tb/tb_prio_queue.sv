// Self-checking testbench for prio_queue.
//
// Drives a random mix of pushes, best pops and worst pops, one per cycle,
// against a reference model kept as a sorted queue in the testbench (bounded
// to N entries, the worst dropped on overflow), and compares best, worst and
// size every cycle. Push-heavy and pop-heavy phases alternate so that the
// queue is often full and often empty. One operation per cycle exercises the II=1 claim.
module tb_prio_queue;
  import mss_pkg::*;
  localparam int N = 8;

  logic clk = 0, rst_n = 0, clr = 0;
  logic push = 0, pop_best = 0, pop_worst = 0;
  cand_t push_data = '0;
  cand_t best, worst;
  logic [$clog2(N+1)-1:0] size;
  logic full;
  int checks = 0, failures = 0;
  cand_t model[$];

  always #5 clk = ~clk;
  prio_queue #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model_push(cand_t c);
    int p = model.size();
    for (int i = 0; i < model.size(); i++)
      if (cand_better(c, model[i])) begin p = i; break; end
    model.insert(p, c);
    if (model.size() > N) void'(model.pop_back());
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int r, np;
      r = $urandom_range(9, 0);
      // alternate push-heavy phases (queue full, overflow, pop-worst on a
      // full queue) with pop-heavy phases (queue drained to empty)
      np = (it % 600 < 300) ? 8 : 4;
      @(negedge clk);
      push = 0; pop_best = 0; pop_worst = 0;
      if (r < np) begin
        push = 1;
        push_data.valid = 1;
        push_data.score = score_t'($urandom_range(60, 0));
        push_data.id    = id_t'($urandom_range(1000, 0));
        model_push(push_data);
      end else if (r < np + (10 - np) / 2) begin
        pop_best = 1;
        if (model.size() > 0) void'(model.pop_front());
      end else begin
        pop_worst = 1;
        if (model.size() > 0) void'(model.pop_back());
      end
      @(posedge clk); #1;
      checks++;
      if (size != model.size()) begin
        failures++; $display("FAIL it=%0d size %0d exp %0d", it, size, model.size());
      end
      if (model.size() > 0) begin
        checks += 2;
        if (best != model[0]) begin failures++; $display("FAIL it=%0d best", it); end
        if (worst != model[model.size()-1]) begin failures++; $display("FAIL it=%0d worst", it); end
      end
      checks++;
      if (full != (model.size() == N)) begin failures++; $display("FAIL full"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
