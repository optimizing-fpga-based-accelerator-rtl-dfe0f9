// Self-checking testbench for bitcnt.
//
// Feeds one 1024-bit vector per cycle (all zeros, all ones, single bits,
// random densities) and checks every count, which must come back exactly
// two cycles later, against $countones of the same vector.
module tb_bitcnt;
  localparam int W = 1024;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [W-1:0] in_data = '0;
  logic out_valid;
  logic [$clog2(W+1)-1:0] out_cnt;
  int checks = 0, failures = 0;
  int exp_q[$];
  int cyc = 0, sent_cyc[$];

  always #5 clk = ~clk;
  bitcnt #(.W(W)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    int e, s;
    cyc++;
    if (rst_n && out_valid) begin
    e = exp_q.pop_front();
    s = sent_cyc.pop_front();
    checks++;
    if (out_cnt != e) begin failures++; $display("FAIL count %0d exp %0d", out_cnt, e); end
    checks++;
    if (cyc - s != 2) begin failures++; $display("FAIL latency %0d", cyc - s); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3, 0) != 0);
      case (i)
        0: in_data = '0;
        1: in_data = '1;
        2: in_data = W'(1) << 1023;
        3: in_data = W'(1);
        default: for (int b = 0; b < W; b++) in_data[b] = ($urandom_range(999, 0) < (i * 3) % 1000);
      endcase
      if (i < 4) in_valid = 1;
      if (in_valid) begin exp_q.push_back($countones(in_data)); sent_cyc.push_back(cyc + 1); end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
