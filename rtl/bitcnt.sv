// BitCnt: pipelined population count of a W-bit fingerprint.
//
// Accepts one fingerprint per cycle (II=1) and returns its number of set bits
// LATENCY = 2 cycles later. Stage 1 counts each GROUP-bit slice of the input
// and registers the partial counts; stage 2 adds the partial counts and
// registers the total. The paper gives only the function of this unit
// ("counts the number of bits", resource linear in the fingerprint length)
// and its II of 1; the two-stage slice-and-add split is this design's choice.
//
// Interface: in_valid/in_data in, out_valid/out_cnt out, no back-pressure.
module bitcnt #(
  parameter int unsigned W     = 1024,
  parameter int unsigned GROUP = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  output logic [$clog2(W+1)-1:0] out_cnt
);
  localparam int unsigned NG    = (W + GROUP - 1) / GROUP;
  localparam int unsigned GCW   = $clog2(GROUP + 1);
  localparam int unsigned CW    = $clog2(W + 1);

  logic [NG-1:0][GCW-1:0] part_q;
  logic                   v1_q;

  always_ff @(posedge clk) begin
    for (int g = 0; g < NG; g++) begin
      logic [GCW-1:0] s;
      s = '0;
      for (int b = 0; b < GROUP; b++)
        if (g * GROUP + b < W) s = s + GCW'(in_data[g*GROUP+b]);
      part_q[g] <= s;
    end
  end

  always_ff @(posedge clk) begin
    logic [CW-1:0] t;
    t = '0;
    for (int g = 0; g < NG; g++) t = t + CW'(part_q[g]);
    out_cnt <= t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
    end
  end
endmodule
