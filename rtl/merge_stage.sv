// One stage of the streaming FIFO merge sorter.
//
// Input: a stream of sorted runs of length R (best entry first), at most one
// entry per cycle. Output: the same entries as sorted runs of length 2R, one
// per cycle, registered. Runs are written alternately into FIFO A and FIFO B;
// as soon as the B half of a pair has its first entry, a single comparator
// picks the better of the two heads each cycle until R entries have been taken
// from each side. Because the next A run streams in while the current pair is
// being merged, the stage keeps pace with its input (II=1) and never blocks
// it; each FIFO needs 2R + 2 entries for that. The cascade of such stages,
// each with two FIFOs and one comparator, is the merge sort structure the
// paper draws for its Top-K unit; the FIFO sizes and the alternation rule
// are this design's choices.
module merge_stage
  import mss_pkg::*;
#(
  parameter int unsigned R = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  in_valid,
  input  cand_t in_cand,
  output logic  out_valid,
  output cand_t out_cand
);
  localparam int unsigned D  = 2 * R + 2;
  localparam int unsigned CW = $clog2(D + 1);
  localparam int unsigned RW = $clog2(R + 1);
  localparam int unsigned IW = (R > 1) ? $clog2(R) : 1;

  logic          wsel;          // 0: current input run goes to A
  logic [IW-1:0] widx;          // position within the input run
  logic [RW-1:0] ta, tb;        // entries taken from A / B in this pair
  cand_t         ha, hb;
  logic [CW-1:0] ca, cb;
  logic          take_a, take_b;

  always_comb begin
    take_a = 1'b0;
    take_b = 1'b0;
    if (ta == RW'(R)) begin
      take_b = (cb != '0);
    end else if (tb == RW'(R)) begin
      take_a = (ca != '0);
    end else if (ca != '0 && cb != '0) begin
      if (cand_better(hb, ha)) take_b = 1'b1;
      else                     take_a = 1'b1;
    end
  end

  cand_fifo #(.DEPTH(D)) u_a (
    .clk, .rst_n, .clr, .push(in_valid && !wsel), .push_data(in_cand),
    .pop(take_a), .drop_n('0), .head(ha), .count(ca)
  );
  cand_fifo #(.DEPTH(D)) u_b (
    .clk, .rst_n, .clr, .push(in_valid && wsel), .push_data(in_cand),
    .pop(take_b), .drop_n('0), .head(hb), .count(cb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel <= 1'b0; widx <= '0; ta <= '0; tb <= '0; out_valid <= 1'b0;
    end else if (clr) begin
      wsel <= 1'b0; widx <= '0; ta <= '0; tb <= '0; out_valid <= 1'b0;
    end else begin
      if (in_valid) begin
        if (widx == IW'(R - 1)) begin
          widx <= '0;
          wsel <= ~wsel;
        end else begin
          widx <= widx + 1'b1;
        end
      end
      out_valid <= take_a || take_b;
      if ((take_a && tb == RW'(R) && ta == RW'(R - 1)) ||
          (take_b && ta == RW'(R) && tb == RW'(R - 1))) begin
        ta <= '0;
        tb <= '0;
      end else begin
        ta <= ta + RW'(take_a);
        tb <= tb + RW'(take_b);
      end
    end
  end

  always_ff @(posedge clk) out_cand <= take_a ? ha : hb;
endmodule
