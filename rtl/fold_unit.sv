// Fold unit: modulo-OR compression of a fingerprint (compression scheme 1).
//
// An L-bit fingerprint is cut into M sections of L/M consecutive bits and the
// sections are ORed bit by bit, so output bit j is the OR of input bits
// j, j + L/M, j + 2L/M, ... This is the folding scheme the paper selects
// (it keeps more accuracy than ORing neighbouring bits). For M = 2 and
// L = 8, 0101_1001 folds to 1101 when bits are read left to right, which is
// the worked example the paper draws. Here bit 0 of the vector is the first
// fingerprint bit.
//
// Purely combinational; the default folding level M = 8 is the level at which
// the paper reports its 25403 QPS / 0.97 recall design point.
module fold_unit #(
  parameter int unsigned L = 1024,
  parameter int unsigned M = 8
) (
  input  logic [L-1:0]   fp_in,
  output logic [L/M-1:0] fp_out
);
  localparam int unsigned S = L / M;

  always_comb begin
    fp_out = '0;
    for (int s = 0; s < M; s++) fp_out = fp_out | fp_in[s*S +: S];
  end

  initial assert (L % M == 0) else $error("fold_unit: L must be a multiple of M");
endmodule
