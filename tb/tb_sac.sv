// Self-checking testbench of sac (d_K = 8): random Q, K, V streams over T
// time steps plus a flush step, a PRN held per step and the causal mask on
// some runs.  The reference computes S^t = (sum_d q&k > prn) & ~mask and
// expects out = S^t & v^t[d] in cycle (t+1)*DK + d.
module tb_sac;
  localparam int DK = 8, T = 6;
  int checks = 0, failures = 0, ones = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0, last = 0, q = 0, k = 0, v = 0, mask = 0;
  logic [2:0] prn;
  logic out;
  logic qa [T+1][DK], ka [T+1][DK], va [T+1][DK];
  int   pw [T+2];
  always #5 clk = ~clk;
  sac #(.DK(DK), .CNT_W(8)) dut (.clk, .rst_n, .en, .first, .last, .q, .k, .v, .mask, .prn, .out);

  initial begin
    prn = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      int dens;
      dens = $urandom_range(1, 4);
      for (int t = 0; t <= T; t++)
        for (int d = 0; d < DK; d++) begin
          qa[t][d] = (t < T) && ($urandom_range(0, 4) < dens);
          ka[t][d] = (t < T) && ($urandom_range(0, 4) < dens);
          va[t][d] = (t < T) && ($urandom_range(0, 1) == 1);
        end
      for (int w = 0; w <= T + 1; w++) pw[w] = $urandom_range(0, DK - 1);
      mask = (run % 5 == 4);
      for (int w = 0; w <= T; w++)
        for (int d = 0; d < DK; d++) begin
          int cnt;
          logic e;
          @(negedge clk);
          en = 1; first = (d == 0); last = (d == DK - 1);
          q = qa[w][d]; k = ka[w][d]; v = va[w][d];
          prn = 3'(pw[w]);
          #1;
          if (w == 0) e = 0;
          else begin
            cnt = 0;
            for (int x = 0; x < DK; x++) cnt += int'(qa[w-1][x] & ka[w-1][x]);
            e = (cnt > pw[w]) && !mask && va[w-1][d];
          end
          if (run > 0 || w > 0) begin
            checks++;
            ones += int'(out);
            if (out !== e) begin failures++; $display("FAIL run=%0d w=%0d d=%0d out=%0b exp=%0b", run, w, d, out, e); end
          end
        end
    end
    checks++;
    if (ones == 0) begin failures++; $display("FAIL output never 1"); end
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
