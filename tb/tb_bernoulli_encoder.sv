// Self-checking testbench of bernoulli_encoder: exhaustive comparison over
// all values 0..64 and PRNs 0..63 (I_max = 64), plus the firing rate: for a
// uniform PRN the number of ones over all PRNs must equal the value.
module tb_bernoulli_encoder;
  int checks = 0, failures = 0;
  logic [7:0] value;
  logic [5:0] prn;
  logic spike;
  bernoulli_encoder #(.VAL_W(8), .PRN_W(6)) dut (.value, .prn, .spike);
  initial begin
    for (int v = 0; v <= 64; v++) begin
      int ones;
      ones = 0;
      for (int r = 0; r < 64; r++) begin
        value = 8'(v); prn = 6'(r); #1;
        checks++;
        if (spike != (v > r)) begin failures++; $display("FAIL v=%0d r=%0d", v, r); end
        ones += int'(spike);
      end
      checks++;
      if (ones != v) begin failures++; $display("FAIL rate v=%0d ones=%0d", v, ones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
