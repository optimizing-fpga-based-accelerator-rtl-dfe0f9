// Self-checking testbench for tfc.
//
// Two instances: one on 1024-bit fingerprints without the BitBound filter,
// one on 128-bit folded fingerprints with it. Random fingerprints of varied
// density (including empty and identical ones) enter one per cycle; every
// output score is compared with floor(4096 * |Q and X| / |Q or X|) (1.0 shown
// as 4095, empty/empty as 0), the filter must pass exactly the entries with
// lw <= cnt <= up, in_last must come out with its slot, and the latency must
// be 15 cycles.
module tb_tfc;
  import mss_pkg::*;
  localparam int LAT = 2 + SCORE_W + 1;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;

  logic [1023:0] q = '0, x = '0;
  logic [127:0]  qf = '0, xf = '0;
  logic in_valid = 0, in_last = 0;
  cnt_t in_cnt = '0;
  id_t  in_id = '0;
  cnt_t lw = 11'd30, up = 11'd90;

  logic  a_valid, a_last, b_valid, b_last;
  cand_t a_cand, b_cand;

  tfc #(.W(1024), .FILTER(1'b0)) dut_a (
    .clk, .rst_n, .query(q), .lw_bd('0), .up_bd('0), .in_valid, .in_last,
    .in_fp(x), .in_cnt, .in_id, .out_valid(a_valid), .out_last(a_last), .out_cand(a_cand));
  tfc #(.W(128), .FILTER(1'b1)) dut_b (
    .clk, .rst_n, .query(qf), .lw_bd(lw), .up_bd(up), .in_valid, .in_last,
    .in_fp(xf), .in_cnt, .in_id, .out_valid(b_valid), .out_last(b_last), .out_cand(b_cand));

  function automatic score_t tani(int i, int u);
    if (u == 0) return '0;
    if (i >= u) return '1;
    return score_t'((i * 4096) / u);
  endfunction

  typedef struct { int cyc; score_t sa; score_t sb; bit pass; bit last; int id; bit v; } exp_t;
  exp_t exp_q[$];

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
    while (exp_q.size() > 0 && exp_q[0].cyc + LAT + 1 < cyc) begin
      exp_t e;
      e = exp_q.pop_front();
      checks++;
      failures++;
      $display("FAIL id %0d never came out", e.id);
    end
    if (exp_q.size() > 0 && exp_q[0].cyc + LAT + 1 == cyc) begin
      exp_t e;
      e = exp_q.pop_front();
      checks += 4;
      if (a_valid != e.v || (e.v && (a_cand.score != e.sa || int'(a_cand.id) != e.id))) begin
        failures++; $display("FAIL A id %0d: v%0d s%0d exp v%0d s%0d", e.id, a_valid, a_cand.score, e.v, e.sa);
      end
      if (b_valid != (e.v && e.pass) || (b_valid && b_cand.score != e.sb)) begin
        failures++; $display("FAIL B id %0d: v%0d s%0d exp pass %0d s%0d", e.id, b_valid, b_cand.score, e.pass, e.sb);
      end
      if (a_last != e.last || b_last != e.last) begin failures++; $display("FAIL last"); end
      if (a_cand.valid != 1'b1) begin failures++; $display("FAIL cand valid"); end
    end else begin
      checks++;
      if (a_valid || b_valid || a_last || b_last) begin failures++; $display("FAIL spurious output"); end
    end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int b = 0; b < 1024; b++) q[b] = ($urandom_range(99, 0) < 10);
    for (int b = 0; b < 128; b++) qf[b] = ($urandom_range(99, 0) < 40);
    for (int i = 0; i < 500; i++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(4, 0) != 0);
      in_last  = (i % 97 == 96);
      for (int b = 0; b < 1024; b++) x[b] = ($urandom_range(999, 0) < (i * 7) % 300);
      if (i == 3) x = '0;
      if (i == 4) x = q;
      for (int b = 0; b < 128; b++) xf[b] = ($urandom_range(99, 0) < (i % 60));
      in_cnt = cnt_t'($urandom_range(130, 0));
      in_id  = id_t'(i);
      if (i == 5) begin q = '0; x = '0; end
      e.cyc = cyc; e.v = in_valid; e.last = in_last; e.id = i;
      e.sa = tani($countones(q & x), $countones(q | x));
      e.sb = tani($countones(qf & xf), $countones(qf | xf));
      e.pass = (in_cnt >= lw && in_cnt <= up);
      if (in_valid || in_last) exp_q.push_back(e);
      if (i == 5) begin
        @(negedge clk);
        in_valid = 0; in_last = 0;
        for (int b = 0; b < 1024; b++) q[b] = ($urandom_range(99, 0) < 10);
        repeat (LAT + 2) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    repeat (LAT + 3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
