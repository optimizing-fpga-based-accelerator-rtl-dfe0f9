// TFC: Tanimoto factor calculation with an optional BitBound filter.
//
// For each database fingerprint X streamed in (one per cycle, II=1) the unit
// computes score = |Q and X| / |Q or X| against the query Q held on the
// 'query' input: two bit-count accumulations (two BitCnt trees) followed by
// one fixed-point division (frac_div) to a 12-bit score. This is the
// structure the paper gives for its TFC ("2 bit count accumulation kernels
// and 1 fixed-point division operation", score kept as 12-bit fixed point).
//
// With FILTER = 1 the unit also applies the BitBound test of the folded scan,
// lw_bd <= cnt(X) <= up_bd, where cnt(X) is the bit count of the
// uncompressed database fingerprint delivered with it in in_cnt. A
// fingerprint that fails the test produces no output; its slot in the
// pipeline is still used, so the rate stays one per cycle. in_last marks the
// final element of a scan and comes out as out_last LATENCY cycles later,
// with or without data on that cycle.
//
// Latency: 2 (bit counts) + SCORE_W + 1 (divider) = 15 cycles.
// out_cand.valid is always 1 (an entry is only presented with out_valid);
// it is kept so the output is a complete cand_t for the sorters.
module tfc
  import mss_pkg::*;
#(
  parameter int unsigned W      = 1024,
  parameter bit          FILTER = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] query,
  input  cnt_t         lw_bd,
  input  cnt_t         up_bd,
  input  logic         in_valid,
  input  logic         in_last,
  input  logic [W-1:0] in_fp,
  input  cnt_t         in_cnt,
  input  id_t          in_id,
  output logic         out_valid,
  output logic         out_last,
  output cand_t        out_cand
);
  localparam int unsigned PCW = $clog2(W + 1);
  localparam int unsigned TW  = ID_W + 2;   // {last, keep, id}

  logic           vi, vu;
  logic [PCW-1:0] cnt_i, cnt_u;
  logic [1:0][TW-1:0] tag_d;
  logic           keep;

  assign keep = in_valid && (!FILTER || (in_cnt >= lw_bd && in_cnt <= up_bd));

  bitcnt #(.W(W)) u_inter (
    .clk, .rst_n, .in_valid(in_valid | in_last), .in_data(in_fp & query),
    .out_valid(vi), .out_cnt(cnt_i)
  );
  bitcnt #(.W(W)) u_union (
    .clk, .rst_n, .in_valid(in_valid | in_last), .in_data(in_fp | query),
    .out_valid(vu), .out_cnt(cnt_u)
  );

  // Tag delay matching the bit-count latency.
  always_ff @(posedge clk) begin
    tag_d[0] <= {in_last, keep, in_id};
    tag_d[1] <= tag_d[0];
  end

  logic           dv;
  logic [TW-1:0]  dtag;
  score_t         dq;

  frac_div #(.NW(PCW), .QW(SCORE_W), .TW(TW)) u_div (
    .clk, .rst_n,
    .in_valid(vi), .in_num(cnt_i), .in_den(cnt_u), .in_tag(tag_d[1]),
    .out_valid(dv), .out_q(dq), .out_tag(dtag)
  );

  assign out_valid      = dv && dtag[ID_W];
  assign out_last       = dv && dtag[ID_W+1];
  assign out_cand.valid = 1'b1;
  assign out_cand.score = dq;
  assign out_cand.id    = dtag[ID_W-1:0];

  // Both bit-count trees run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) vi == vu);
endmodule
