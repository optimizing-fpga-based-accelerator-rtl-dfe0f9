// Candidate FIFO used by the merge sorter stages.
//
// A circular buffer of DEPTH cand_t entries with a combinational head. In one
// cycle it can push one entry at the tail, pop one at the head, and also
// discard 'drop_n' further entries behind the popped one (the final top-K
// stage uses this to throw away the unused rest of a run at once). Pushing
// into a full FIFO, or popping/dropping more than it holds, is a protocol
// error caught by assertions.
module cand_fifo
  import mss_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      push,
  input  cand_t                     push_data,
  input  logic                      pop,
  input  logic [$clog2(DEPTH+1)-1:0] drop_n,
  output cand_t                     head,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  cand_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;

  function automatic logic [AW-1:0] adv(logic [AW-1:0] p, logic [CW-1:0] n);
    logic [AW+CW:0] s;
    s = (AW+CW+1)'(p) + (AW+CW+1)'(n);
    if (s >= (AW+CW+1)'(DEPTH)) s = s - (AW+CW+1)'(DEPTH);
    return AW'(s);
  endfunction

  assign head = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (clr) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= adv(wr_ptr, CW'(1));
      rd_ptr <= adv(rd_ptr, CW'(pop) + drop_n);
      count  <= count + CW'(push) - CW'(pop) - drop_n;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n || clr)
                    !(push && !pop && drop_n == 0 && count == CW'(DEPTH)));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clr)
                    (CW+1)'(pop) + (CW+1)'(drop_n) <= (CW+1)'(count));
endmodule
