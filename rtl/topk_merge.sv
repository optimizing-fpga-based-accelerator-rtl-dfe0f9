// Top-K merge sorter: streaming selection of the K best scored compounds.
//
// Scored compounds enter at up to one per cycle (II=1) with no back-pressure.
// A cascade of log2(KP) merge stages (KP = K rounded up to a power of two)
// turns the stream into sorted runs of KP entries; a final keep stage merges
// each run into the running list of the K best and drops the rest. This is
// log2(KP) + 1 comparators in all, the merge sort organisation of FIFOs and
// comparators that the paper gives for its Top-K unit, against the log2K + 1
// comparators it states.
//
// in_last marks the end of a scan (with or without an entry on that cycle).
// The front end then pads the last partial run with invalid entries, which
// rank below every real one, waits until every run has been merged and
// streams out the K best entries, best first, on out_valid/out_cand, with
// out_last on the K-th. Fewer than K real entries leave invalid entries at the
// end of the list. 'busy' is high from the first entry of a scan until the
// result has been streamed; a new scan must not start before it drops.
//
// Timing: the final result starts about N + (KP - N mod KP) + KP cycles after
// the first of N inputs and takes K cycles to stream.
module topk_merge
  import mss_pkg::*;
#(
  parameter int unsigned K    = 20,
  parameter int unsigned RUNW = 24
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_last,
  input  cand_t in_cand,
  output logic  out_valid,
  output logic  out_last,
  output cand_t out_cand,
  output logic  busy
);
  localparam int unsigned KP = (K <= 1) ? 1 : (1 << $clog2(K));
  localparam int unsigned S  = $clog2(KP);
  localparam int unsigned PW = (KP > 1) ? $clog2(KP) : 1;

  typedef enum logic [1:0] {F_RUN, F_PAD, F_FIN} fstate_e;
  fstate_e fstate;

  logic [PW-1:0]   pad_idx;
  logic [RUNW-1:0] runs_total;
  logic            fin;
  logic            f_valid;
  cand_t           f_cand;
  logic            keep_idle;
  logic            active;

  always_comb begin
    f_valid = 1'b0;
    f_cand  = in_cand;
    if (fstate == F_RUN && in_valid) begin
      f_valid = 1'b1;
    end else if (fstate == F_PAD) begin
      f_valid = 1'b1;
      f_cand  = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate <= F_RUN; pad_idx <= '0; runs_total <= '0; fin <= 1'b0; active <= 1'b0;
    end else begin
      if (f_valid) begin
        if (pad_idx == PW'(KP - 1) || KP == 1) begin
          pad_idx    <= '0;
          runs_total <= runs_total + 1'b1;
        end else begin
          pad_idx <= pad_idx + 1'b1;
        end
      end
      if (in_valid) active <= 1'b1;
      case (fstate)
        F_RUN: if (in_last) begin
          active <= 1'b1;
          // Does the scan end on a run boundary?
          if ((f_valid && (pad_idx == PW'(KP - 1) || KP == 1)) ||
              (!f_valid && pad_idx == '0)) begin
            fstate <= F_FIN;
            fin    <= 1'b1;
          end else begin
            fstate <= F_PAD;
          end
        end
        F_PAD: if (pad_idx == PW'(KP - 1)) begin
          fstate <= F_FIN;
          fin    <= 1'b1;
        end
        default: if (out_last) begin
          fstate     <= F_RUN;
          fin        <= 1'b0;
          runs_total <= '0;
          pad_idx    <= '0;
          active     <= 1'b0;
        end
      endcase
    end
  end

  assign busy = active || (fstate != F_RUN) || !keep_idle;

  logic  [S:0] sv;
  cand_t [S:0] sc;
  assign sv[0] = f_valid;
  assign sc[0] = f_cand;

  for (genvar s = 0; s < S; s++) begin : g_stage
    merge_stage #(.R(1 << s)) u_stage (
      .clk, .rst_n, .clr(1'b0),
      .in_valid(sv[s]), .in_cand(sc[s]),
      .out_valid(sv[s+1]), .out_cand(sc[s+1])
    );
  end

  topk_keep #(.K(K), .KP(KP), .RUNW(RUNW)) u_keep (
    .clk, .rst_n,
    .in_valid(sv[S]), .in_cand(sc[S]),
    .fin, .runs_total,
    .out_valid, .out_last, .out_cand, .idle(keep_idle)
  );

  a_no_input_while_finishing: assert property (@(posedge clk) disable iff (!rst_n)
                                fstate != F_RUN |-> !in_valid);
endmodule
