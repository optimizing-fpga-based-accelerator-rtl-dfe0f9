// Final stage of the Top-K merge sorter: keeps the K best entries seen so far.
//
// Input: sorted runs of KP >= K entries (best first) from the last merge
// stage. Only the first K entries of each run can reach the result, so the
// rest are not stored. Each run is merged with the current best list, held in
// the BEST FIFO, by one comparator; the first K merged entries are written
// back to the tail of BEST as the new list, after which the unused old
// entries of BEST and of the run are discarded at once (pointer jumps, or a
// skip count for run entries that have not arrived yet). A run therefore costs
// K cycles of merging and the stage keeps up with one input per cycle.
//
// When 'fin' is set and 'runs_total' runs have been merged, the K-entry list
// is streamed out on out_valid/out_cand (out_last on the final entry) and
// the stage clears itself for the next query once 'fin' drops. With no runs at all it streams
// K invalid entries.
module topk_keep
  import mss_pkg::*;
#(
  parameter int unsigned K  = 20,
  parameter int unsigned KP = 32,
  parameter int unsigned RUNW = 24
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  cand_t           in_cand,
  input  logic            fin,
  input  logic [RUNW-1:0] runs_total,
  output logic            out_valid,
  output logic            out_last,
  output cand_t           out_cand,
  output logic            idle
);
  localparam int unsigned DB  = 2 * K;
  localparam int unsigned CBW = $clog2(DB + 1);
  localparam int unsigned KW  = $clog2(K + 1);
  localparam int unsigned PW  = (KP > 1) ? $clog2(KP) : 1;

  typedef enum logic [1:0] {S_MERGE, S_DRAIN, S_WAIT} state_e;
  state_e state;

  // Input side: position in the incoming run, run parity, skip count.
  logic [PW-1:0] in_idx;
  logic          in_par;
  logic [KW-1:0] skip;
  logic [1:0][KW-1:0] arr;      // entries of each run parity written to NEW
  logic          wr_new;

  // Merge side.
  logic          mpar;
  logic [KW-1:0] tb, tn, outs, best_len;
  logic [RUNW-1:0] runs_done;
  cand_t         hb, hn;
  logic [CBW-1:0] cbest, cnew;
  logic          take_b, take_n, closing;
  logic [CBW-1:0] drop_b, drop_n;
  logic [KW-1:0]  arr_now;
  logic [KW-1:0]  drain_idx;
  logic           drain_pop;

  assign wr_new = in_valid && ((PW+1)'(in_idx) < (PW+1)'(K)) && (skip == '0);

  always_comb begin
    take_b = 1'b0;
    take_n = 1'b0;
    if (state == S_MERGE) begin
      if (tb == best_len) begin
        take_n = (cnew != '0);
      end else if (cnew != '0) begin
        if (cand_better(hn, hb)) take_n = 1'b1;
        else                     take_b = 1'b1;
      end
    end
  end

  assign closing = (take_b || take_n) && (outs == KW'(K - 1));
  assign arr_now = arr[mpar] + KW'(wr_new && (in_par == mpar));

  always_comb begin
    drop_b = '0;
    drop_n = '0;
    if (closing) begin
      drop_b = CBW'(best_len - tb - KW'(take_b));
      drop_n = CBW'(arr_now - tn - KW'(take_n));
    end
  end

  assign drain_pop = (state == S_DRAIN) && (drain_idx < best_len);

  cand_fifo #(.DEPTH(DB)) u_best (
    .clk, .rst_n, .clr(1'b0),
    .push(take_b || take_n), .push_data(take_n ? hn : hb),
    .pop(take_b || drain_pop), .drop_n(drop_b), .head(hb), .count(cbest)
  );
  cand_fifo #(.DEPTH(DB)) u_new (
    .clk, .rst_n, .clr(1'b0),
    .push(wr_new), .push_data(in_cand),
    .pop(take_n), .drop_n(drop_n), .head(hn), .count(cnew)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_MERGE; in_idx <= '0; in_par <= 1'b0; skip <= '0; arr <= '0;
      mpar <= 1'b0; tb <= '0; tn <= '0; outs <= '0; best_len <= '0;
      runs_done <= '0; drain_idx <= '0;
      out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      // Input bookkeeping.
      if (in_valid) begin
        if (in_idx == PW'(KP - 1)) begin
          in_idx <= '0;
          in_par <= ~in_par;
        end else begin
          in_idx <= in_idx + 1'b1;
        end
        if ((PW+1)'(in_idx) < (PW+1)'(K) && skip != '0) skip <= skip - 1'b1;
      end
      if (wr_new && !(closing && in_par == mpar)) arr[in_par] <= arr[in_par] + 1'b1;

      case (state)
        S_MERGE: begin
          if (closing) begin
            tb        <= '0;
            tn        <= '0;
            outs      <= '0;
            best_len  <= KW'(K);
            skip      <= KW'(K) - arr_now;
            arr[mpar] <= '0;
            mpar      <= ~mpar;
            runs_done <= runs_done + 1'b1;
          end else begin
            tb   <= tb + KW'(take_b);
            tn   <= tn + KW'(take_n);
            outs <= outs + KW'(take_b || take_n);
          end
          if (fin && !closing && runs_done == runs_total) begin
            state     <= S_DRAIN;
            drain_idx <= '0;
          end
        end
        S_WAIT: if (!fin) state <= S_MERGE;  // wait for the front end to see the end
        default: begin  // S_DRAIN
          out_valid <= 1'b1;
          out_last  <= (drain_idx == KW'(K - 1));
          if (drain_idx == KW'(K - 1)) begin
            state     <= S_WAIT;
            best_len  <= '0;
            runs_done <= '0;
            in_idx    <= '0;
            in_par    <= 1'b0;
            mpar      <= 1'b0;
            skip      <= '0;
            arr       <= '0;
          end else begin
            drain_idx <= drain_idx + 1'b1;
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk) out_cand <= (drain_idx < best_len) ? hb : '0;

  assign idle = (state == S_MERGE) && (runs_done == '0) && (best_len == '0);

  a_best_bound: assert property (@(posedge clk) disable iff (!rst_n)
                  cbest <= CBW'(2 * K));
  a_no_skip_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                       closing |-> skip == '0);
endmodule
