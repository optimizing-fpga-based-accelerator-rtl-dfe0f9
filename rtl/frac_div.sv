// Pipelined fixed-point fraction divider: q = floor(2^QW * num / den).
//
// Used by the Tanimoto factor unit for the one fixed-point division of
// |Q and X| / |Q or X|. The numerator never exceeds the denominator there, so
// the quotient is a pure fraction: num >= den (a score of 1.0) saturates to
// 2^QW - 1 and den = 0 (two empty fingerprints) gives 0. The body is a
// restoring divider unrolled into QW register stages, one quotient bit per
// stage, so it takes one division per cycle (II=1) with a latency of QW + 1
// cycles. A TW-bit tag travels with each operand pair. The paper states only
// that one fixed-point division is done; the restoring structure is this
// design's choice.
module frac_div #(
  parameter int unsigned NW = 11,
  parameter int unsigned QW = 12,
  parameter int unsigned TW = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NW-1:0] in_num,
  input  logic [NW-1:0] in_den,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output logic [QW-1:0] out_q,
  output logic [TW-1:0] out_tag
);
  // Stage s holds the partial remainder after s quotient bits.
  logic [QW:0]         v_q;
  logic [QW:0][NW:0]   rem_q;
  logic [QW:0][NW-1:0] den_q;
  logic [QW:0][QW-1:0] quo_q;
  logic [QW:0]         sat_q;   // force all-ones
  logic [QW:0]         zero_q;  // force zero
  logic [QW:0][TW-1:0] tag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[QW-1:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // Stage 0: capture and classify.
    rem_q[0]  <= {1'b0, in_num};
    den_q[0]  <= in_den;
    quo_q[0]  <= '0;
    zero_q[0] <= (in_den == '0);
    sat_q[0]  <= (in_den != '0) && (in_num >= in_den);
    tag_q[0]  <= in_tag;
    // Stages 1..QW: one restoring step each.
    for (int s = 1; s <= QW; s++) begin
      logic [NW+1:0] r2;
      r2 = {rem_q[s-1], 1'b0};
      if (r2 >= (NW+2)'(den_q[s-1])) begin
        rem_q[s] <= (NW+1)'(r2 - (NW+2)'(den_q[s-1]));
        quo_q[s] <= {quo_q[s-1][QW-2:0], 1'b1};
      end else begin
        rem_q[s] <= r2[NW:0];
        quo_q[s] <= {quo_q[s-1][QW-2:0], 1'b0};
      end
      den_q[s]  <= den_q[s-1];
      zero_q[s] <= zero_q[s-1];
      sat_q[s]  <= sat_q[s-1];
      tag_q[s]  <= tag_q[s-1];
    end
  end

  assign out_valid = v_q[QW];
  assign out_tag   = tag_q[QW];
  assign out_q     = zero_q[QW] ? '0 : sat_q[QW] ? '1 : quo_q[QW];
endmodule
