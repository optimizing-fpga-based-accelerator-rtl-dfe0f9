// Register-array priority queue of N scored compounds, II=1.
//
// The entries are kept sorted in a register array, best (highest score) at
// index 0 and empty slots (valid = 0) at the end. Every cycle the queue can do
// one of: push an entry, pop the best entry, or pop the worst entry. A push
// compares the new entry with every stored entry in parallel (one comparator
// per slot, so the comparator count grows linearly with N) and every slot
// chooses in the same cycle between keeping its entry, taking the new one or
// taking its left neighbour's; a push into a full queue drops the worst of
// the N + 1 entries. Pops shift the array by one slot. The best and worst
// entries and the size are registered state, valid every cycle.
//
// The paper gives the register-array organisation, the linear comparator
// count and the II of 1 for both enqueue and dequeue; it describes the
// compare-and-swap as alternating between even and odd entries. This design
// instead resolves a push in one cycle with a parallel compare-and-shift, which
// keeps the same resources and rate but does not depend on the even/odd
// schedule; that substitution is this design's choice. Pop-worst is added
// because the HNSW result set needs its furthest element.
module prio_queue
  import mss_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   push,
  input  cand_t                  push_data,
  input  logic                   pop_best,
  input  logic                   pop_worst,
  output cand_t                  best,
  output cand_t                  worst,
  output logic [$clog2(N+1)-1:0] size,
  output logic                   full
);
  localparam int unsigned SW = $clog2(N + 1);

  cand_t [N-1:0] e, e_nxt;
  logic  [N-1:0] gt;

  always_comb begin
    for (int i = 0; i < N; i++) gt[i] = cand_better(push_data, e[i]);
    e_nxt = e;
    if (push) begin
      for (int i = 0; i < N; i++) begin
        if (gt[i]) e_nxt[i] = (i == 0 || !gt[(i == 0) ? 0 : i-1]) ? push_data : e[(i == 0) ? 0 : i-1];
      end
    end else if (pop_best) begin
      for (int i = 0; i < N - 1; i++) e_nxt[i] = e[i+1];
      e_nxt[N-1] = '0;
    end else if (pop_worst) begin
      for (int i = 0; i < N - 1; i++) e_nxt[i].valid = e[i].valid && e[i+1].valid;
      e_nxt[N-1].valid = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e    <= '0;
      size <= '0;
    end else if (clr) begin
      e    <= '0;
      size <= '0;
    end else begin
      e <= e_nxt;
      if (push && push_data.valid && size != SW'(N))      size <= size + 1'b1;
      else if ((pop_best || pop_worst) && !push && size != '0) size <= size - 1'b1;
    end
  end

  always_comb begin
    worst = '0;
    for (int i = 0; i < N; i++) if (e[i].valid) worst = e[i];
  end

  assign best = e[0];
  assign full = (size == SW'(N));

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
              $onehot0({push, pop_best, pop_worst}));
  a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
              (N < 2) || !e[1].valid || !cand_better(e[1], e[0]));
endmodule
