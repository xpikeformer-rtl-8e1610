// Self-checking testbench of lif_unit: random local sums, gains and
// thresholds drive neurons of random length; a reference model computes
// I = (sum*gain)>>>8, V = (V>>>1) + I (V=0 on clear), spike = V >= thr,
// reset to 0 after a spike, saturation at 12 bits.  Spikes and potentials are
// compared every step.
module tb_lif_unit;
  int checks = 0, failures = 0, fires = 0, sats = 0;
  logic clk = 0, rst_n = 0, thr_we = 0, valid = 0, clear = 0;
  logic signed [11:0] thr_in, vmem;
  logic [9:0] gain;
  logic signed [3:0][5:0] ls;
  logic spike;
  int v_ref, thr_ref;
  always #5 clk = ~clk;
  lif_unit #(.NIN(4), .IN_W(6), .V_W(12)) dut (
    .clk, .rst_n, .thr_we, .thr_in, .gain, .valid, .clear, .local_sum(ls), .spike, .vmem);

  initial begin
    ls = '0; gain = 10'd256; thr_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    v_ref = 0;
    for (int nrn = 0; nrn < 200; nrn++) begin
      int len;
      @(negedge clk);
      thr_we = 1; thr_in = 12'($urandom_range(1, 120)); thr_ref = int'(thr_in);
      gain = (nrn % 4 == 0) ? 10'($urandom_range(128, 1023)) : 10'd256;
      @(negedge clk); thr_we = 0;
      len = $urandom_range(1, 8);
      for (int t = 0; t < len; t++) begin
        int sum, I, vn, sp;
        sum = 0;
        for (int i = 0; i < 4; i++) begin
          int x;
          x = (nrn % 10 == 9) ? 31 : $urandom_range(0, 62) - 31;
          ls[i] = 6'(x); sum += x;
        end
        valid = 1; clear = (t == 0);
        I  = (sum * int'(gain)) >>> 8;
        vn = (clear ? 0 : (v_ref >>> 1)) + I;
        if (vn > 2047) begin vn = 2047; sats++; end
        if (vn < -2048) begin vn = -2048; sats++; end
        sp = (vn >= thr_ref);
        #1;
        checks++;
        if (spike != sp[0]) begin failures++; $display("FAIL spike nrn=%0d t=%0d", nrn, t); end
        @(posedge clk); #1;
        v_ref = sp ? 0 : vn;
        fires += sp;
        checks++;
        if (int'(vmem) != v_ref) begin failures++; $display("FAIL v nrn=%0d t=%0d got %0d exp %0d", nrn, t, vmem, v_ref); end
        @(negedge clk); valid = 0;
      end
    end
    checks++;
    if (fires == 0) begin failures++; $display("FAIL fires=%0d sats=%0d", fires, sats); end
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
