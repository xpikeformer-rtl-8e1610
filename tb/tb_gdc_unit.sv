// Self-checking testbench of gdc_unit: a reference sum is stored, then
// drifted calibration sums are applied; the gain must become
// min(1023, (ref*256)/sum) within SUM_W+GF+1 cycles, and 256 after a new
// reference.
module tb_gdc_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cal_valid = 0, cal_ref = 0, busy;
  logic [13:0] cal_sum;
  logic [9:0] gain;
  always #5 clk = ~clk;
  gdc_unit #(.SUM_W(14), .GF(8), .GAIN_W(10)) dut (.clk, .rst_n, .cal_valid, .cal_ref, .cal_sum, .gain, .busy);

  task automatic cal(input bit r, input int s, output int cycles);
    @(negedge clk); cal_valid = 1; cal_ref = r; cal_sum = 14'(s);
    @(negedge clk); cal_valid = 0;
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int ref_s, cyc, e;
    cal_sum = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      ref_s = $urandom_range(100, 8000);
      cal(1, ref_s, cyc);
      checks++;
      if (gain != 10'd256) begin failures++; $display("FAIL ref gain %0d", gain); end
      for (int m = 0; m < 4; m++) begin
        int s;
        s = (m == 3) ? ref_s / 5 : (ref_s * $urandom_range(60, 100)) / 100;
        if (s == 0) s = 1;
        cal(0, s, cyc);
        e = (ref_s * 256) / s;
        if (e > 1023) e = 1023;
        checks++;
        if (int'(gain) != e) begin failures++; $display("FAIL gain %0d exp %0d (ref %0d meas %0d)", gain, e, ref_s, s); end
        checks++;
        if (cyc > 14 + 8 + 1) begin failures++; $display("FAIL divider took %0d cycles", cyc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
