// Self-checking testbench of lfsr_array: every LFSR is compared bit-exactly
// with an independent model of x^32+x^22+x^2+x+1 advanced 32 steps per
// enabled clock from the documented seed; the state must hold when en is low
// and the byte streams must be roughly uniform.
module tb_lfsr_array;
  localparam int NUM = 3;
  localparam logic [31:0] SB = 32'h1234_5678;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [4*NUM-1:0][7:0] prn;
  logic [31:0] m [NUM];
  int hist_hi = 0, total = 0;
  always #5 clk = ~clk;
  lfsr_array #(.NUM(NUM), .SEED_BASE(SB)) dut (.clk, .rst_n, .en, .prn);

  function automatic logic [31:0] adv(input logic [31:0] s);
    for (int i = 0; i < 32; i++) s = {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
    return s;
  endfunction

  initial begin
    for (int i = 0; i < NUM; i++) begin
      m[i] = SB ^ (32'(i + 1) * 32'h9E37_79B9);
      if (m[i] == 0) m[i] = 1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int i = 0; i < NUM; i++) begin
        checks++;
        if (prn[4*i +: 4] != m[i]) begin
          failures++;
          if (failures < 5) $display("FAIL lfsr %0d got %h exp %h", i, prn[4*i +: 4], m[i]);
        end
        for (int b = 0; b < 4; b++) begin
          total++;
          if (prn[4*i+b] >= 8'd128) hist_hi++;
        end
      end
      en = ($urandom_range(0, 4) != 0);
      @(posedge clk);
      if (en) for (int i = 0; i < NUM; i++) m[i] = adv(m[i]);
    end
    checks++;
    if (hist_hi < total * 4 / 10 || hist_hi > total * 6 / 10) begin
      failures++; $display("FAIL uniformity %0d of %0d", hist_hi, total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
