// Self-checking testbench of ssa_tile (N = 4 tokens, d_K = 8): random binary
// Q, K, V over T time steps, with and without the causal mask.  The testbench
// drives all PRNs itself and computes the attention output exactly:
//   S^t(i,j) = (sum_d Q[d,i]K[d,j] > sac_prn) & !(causal & j>i)
//   A^t[d,i] = (sum_j S^t(i,j) V^t[d,j] > col_prn)
// It also checks that the first output comes DK+1 cycles after the first
// input and that every time step takes exactly DK cycles.
module tb_ssa_tile;
  localparam int N = 4, DK = 8, T = 5, DW = 3, NW = 2;
  int checks = 0, failures = 0, ones = 0, first_out = -1;
  logic clk = 0, rst_n = 0, en = 0, sync = 0, causal = 0;
  logic [N-1:0] q_col, k_row, v_row, a_out;
  logic [N*N-1:0][DW-1:0] sac_prn;
  logic [N-1:0][NW-1:0] col_prn;
  logic step, a_valid;
  logic Q [T+1][DK][N], K [T+1][DK][N], V [T+1][DK][N];
  int   sp [T+2][N][N];
  int   cp [(T+2)*DK][N];
  logic S  [N][N];
  always #5 clk = ~clk;
  ssa_tile #(.N(N), .DK(DK), .CNT_W(8)) dut (
    .clk, .rst_n, .en, .sync, .causal, .q_col, .k_row, .v_row, .sac_prn, .col_prn,
    .step, .a_out, .a_valid);

  initial begin
    q_col = '0; k_row = '0; v_row = '0; sac_prn = '0; col_prn = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      causal = run[0];
      for (int t = 0; t <= T; t++)
        for (int d = 0; d < DK; d++)
          for (int n = 0; n < N; n++) begin
            Q[t][d][n] = (t < T) && ($urandom_range(0, 3) != 0);
            K[t][d][n] = (t < T) && ($urandom_range(0, 3) != 0);
            V[t][d][n] = (t < T) && ($urandom_range(0, 1) == 1);
          end
      for (int w = 0; w <= T + 1; w++)
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) sp[w][i][j] = $urandom_range(0, DK - 1);
      for (int c = 0; c < (T + 2) * DK; c++)
        for (int i = 0; i < N; i++) cp[c][i] = $urandom_range(0, N - 1);
      for (int c = 0; c <= (T + 1) * DK; c++) begin
        int w, d;
        w = c / DK; d = c % DK;
        @(negedge clk);
        // check the output registered at the end of cycle c-1
        if (c > 0) begin
          int pc, pw, pd;
          pc = c - 1; pw = pc / DK; pd = pc % DK;
          checks++;
          if (a_valid !== (pw >= 1)) begin failures++; $display("FAIL a_valid run=%0d c=%0d", run, c); end
          if (a_valid && first_out < 0) first_out = c;
          if (pw >= 1) begin
            for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
              int cnt;
              cnt = 0;
              for (int x = 0; x < DK; x++) cnt += int'(Q[pw-1][x][i] & K[pw-1][x][j]);
              S[i][j] = (cnt > sp[pw][i][j]) && !(causal && j > i);
            end
            for (int i = 0; i < N; i++) begin
              int s;
              logic e;
              s = 0;
              for (int j = 0; j < N; j++) s += int'(S[i][j] & V[pw-1][pd][j]);
              e = (s > cp[pc][i]);
              checks++;
              ones += int'(a_out[i]);
              if (a_out[i] !== e) begin failures++; $display("FAIL run=%0d t=%0d d=%0d i=%0d got %0b exp %0b", run, pw-1, pd, i, a_out[i], e); end
            end
          end
        end
        if (c == (T + 1) * DK) begin en = 0; sync = 0; break; end
        en = 1; sync = (c == 0);
        for (int n = 0; n < N; n++) begin
          q_col[n] = Q[w][d][n]; k_row[n] = K[w][d][n]; v_row[n] = V[w][d][n];
          col_prn[n] = NW'(cp[c][n]);
        end
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) sac_prn[i*N + j] = DW'(sp[w][i][j]);
        #1;
        checks++;
        if (step !== (d == DK - 1)) begin failures++; $display("FAIL step c=%0d", c); end
      end
      if (run == 0) begin
        checks++;
        if (first_out != DK + 1) begin failures++; $display("FAIL latency %0d, expected %0d", first_out, DK + 1); end
      end
      @(negedge clk);
    end
    checks++;
    if (ones == 0) begin failures++; $display("FAIL no attention output"); end
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
