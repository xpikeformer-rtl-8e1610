// Self-checking testbench of prog_dac: every 5-bit weight code is applied and
// the G+/G- levels are compared with the differential-pair mapping.
module tb_prog_dac;
  int checks = 0, failures = 0;
  logic signed [4:0] w;
  logic [3:0] gp, gn;
  prog_dac dut (.w, .gp, .gn);
  initial begin
    for (int i = -16; i < 16; i++) begin
      int ep, en;
      w = 5'(i);
      #1;
      ep = (i > 0) ? i : 0;
      en = (i < 0) ? ((-i > 15) ? 15 : -i) : 0;
      checks++;
      if (int'(gp) != ep || int'(gn) != en) begin
        failures++;
        $display("FAIL w=%0d gp=%0d gn=%0d exp %0d %0d", i, gp, gn, ep, en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
