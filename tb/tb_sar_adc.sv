// Self-checking testbench of sar_adc: random currents, the sampled code must
// equal min(31, I >> 2) one clock later and hold while sample is low.
module tb_sar_adc;
  int checks = 0, failures = 0;
  logic clk = 0, sample;
  logic [10:0] i_in;
  logic [4:0]  code;
  int exp_code;
  always #5 clk = ~clk;
  sar_adc dut (.clk, .sample, .i_in, .code);
  initial begin
    sample = 0; i_in = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      i_in = 11'($urandom_range(0, (n % 2) ? 200 : 1920));
      sample = ($urandom_range(0, 3) != 0);
      if (sample) exp_code = ((int'(i_in) >> 2) > 31) ? 31 : (int'(i_in) >> 2);
      @(posedge clk); #1;
      if (n > 0 || sample) begin
        checks++;
        if (int'(code) != exp_code) begin
          failures++;
          $display("FAIL i=%0d code=%0d exp=%0d", i_in, code, exp_code);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
