// Self-checking testbench for fold_unit.
//
// Checks the worked L = 8, m = 2 example (fingerprint 0,1,0,1,1,0,0,1 folds
// to 1,1,0,1) and then random 1024-bit fingerprints at m = 8, each output bit
// against the OR of input bits j, j + 128, ..., j + 896.
module tb_fold_unit;
  int checks = 0, failures = 0;

  logic [7:0] s_in;
  logic [3:0] s_out;
  fold_unit #(.L(8), .M(2)) dut_small (.fp_in(s_in), .fp_out(s_out));

  logic [1023:0] b_in;
  logic [127:0]  b_out;
  fold_unit dut (.fp_in(b_in), .fp_out(b_out));

  initial begin
    // Bit 0 is the first fingerprint bit: 0,1,0,1,1,0,0,1.
    s_in = 8'b1001_1010;
    #1;
    checks++;
    if (s_out != 4'b1011) begin failures++; $display("FAIL example: %b", s_out); end
    for (int t = 0; t < 200; t++) begin
      for (int b = 0; b < 1024; b++) b_in[b] = ($urandom_range(99, 0) < t % 40);
      #1;
      for (int j = 0; j < 128; j++) begin
        logic e;
        e = 0;
        for (int s = 0; s < 8; s++) e |= b_in[s * 128 + j];
        checks++;
        if (b_out[j] != e) begin failures++; $display("FAIL t=%0d bit %0d", t, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
