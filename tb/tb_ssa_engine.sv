// Self-checking testbench of ssa_engine (2 tiles, N = 8, d_K = 16, T = 4)
// with a spike_sram holding Q|K|V per token.  Patterns make the stochastic
// result exact or give it a known rate:
//  1. non-causal, head 0: Q = K = 1 everywhere, so every S = 1 and
//     A[d,i] = V[d] when V[d,:] is all ones or all zeros; head 1: Q = 0, so
//     A = 0.  Bits outside the heads' slices must survive the masked store.
//  2. causal, Q = K = V = 1: A[d,i] ~ Bern((i+1)/N), exactly 1 for i = N-1,
//     rates of the others within tolerance.
//  3. a shorter sequence (5 tokens): rate 5/N, tokens beyond are not written.
// The first-output latency must be d_K + 1 cycles.
module tb_ssa_engine;
  import xp_pkg::*;
  localparam int NH = 2, N = 8, DK = 16, TMAX = 4, T = 4;
  localparam int SRC = 0, DST = 512;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  cmd_t cmd;
  logic busy, done;
  sram_req_t eng_req, tb_req, req;
  logic [WORD_W-1:0] rdata;
  logic [15:0] first_latency;
  logic vpat [T][DK];
  int mechanisms_causal = 0, mechanisms_plain = 0, mechanisms_short = 0;
  always #5 clk = ~clk;

  ssa_engine #(.NH(NH), .N(N), .DK(DK), .TMAX(TMAX)) dut (
    .clk, .rst_n, .start, .cmd, .busy, .done, .mem_req(eng_req), .mem_rdata(rdata), .first_latency);
  assign req = busy ? eng_req : tb_req;
  spike_sram #(.DEPTH(1024)) u_mem (.clk, .req, .rdata);

  task automatic wr(input int a, input logic [WORD_W-1:0] d);
    @(negedge clk); tb_req = '{en: 1, we: 1, addr: ADDR_W'(a), wdata: d, wmask: '1};
    @(negedge clk); tb_req = '0;
  endtask
  task automatic rd(input int a, output logic [WORD_W-1:0] d);
    @(negedge clk); tb_req = '{en: 1, we: 0, addr: ADDR_W'(a), wdata: '0, wmask: '0};
    @(negedge clk); tb_req = '0; d = rdata;
  endtask
  task automatic run(input int ntok, input bit causal);
    cmd = '0;
    cmd.op = OP_SSA; cmd.src_base = SRC; cmd.src_wpv = 3; cmd.dst_base = DST; cmd.dst_wpv = 1;
    cmd.n_tok = 8'(ntok); cmd.t_steps = 5'(T); cmd.head_base = 0; cmd.dmodel_words = 1; cmd.causal = causal;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (first_latency != 16'(DK + 1)) begin failures++; $display("FAIL latency %0d", first_latency); end
  endtask
  // Q|K|V words: head 0 bits [15:0], head 1 bits [31:16]
  task automatic fill(input int ntok, input bit vrand);
    for (int t = 0; t < T; t++) begin
      for (int d = 0; d < DK; d++) vpat[t][d] = vrand ? ($urandom_range(0, 1) == 1) : 1'b1;
      for (int n = 0; n < ntok; n++) begin
        logic [WORD_W-1:0] qw, kw, vw;
        qw = '0; kw = '0; vw = '0;
        qw[15:0] = '1;                         // head 0: all ones, head 1: zeros
        kw[31:0] = '1;
        for (int d = 0; d < DK; d++) begin vw[d] = vpat[t][d]; vw[16 + d] = vpat[t][d]; end
        wr(SRC + (t * ntok + n) * 3 + 0, qw);
        wr(SRC + (t * ntok + n) * 3 + 1, kw);
        wr(SRC + (t * ntok + n) * 3 + 2, vw);
      end
    end
  endtask

  initial begin
    logic [WORD_W-1:0] d;
    tb_req = '0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- 1: non-causal, exact ----
    fill(N, 1);
    for (int a = 0; a < T * N; a++) wr(DST + a, {96'hDEAD_BEEF_0123_4567_89AB_CDEF, 32'h0});
    run(N, 0);
    mechanisms_plain++;
    for (int t = 0; t < T; t++) for (int n = 0; n < N; n++) begin
      rd(DST + t * N + n, d);
      for (int x = 0; x < DK; x++) begin
        checks++;
        if (d[x] !== vpat[t][x]) begin failures++; $display("FAIL plain t=%0d n=%0d d=%0d", t, n, x); end
      end
      checks++;
      if (d[31:16] !== 16'h0) begin failures++; $display("FAIL head1 not zero t=%0d n=%0d", t, n); end
      checks++;
      if (d[127:32] !== 96'hDEAD_BEEF_0123_4567_89AB_CDEF) begin failures++; $display("FAIL mask t=%0d n=%0d", t, n); end
    end
    // ---- 2: causal, rates ----
    fill(N, 0);
    run(N, 1);
    mechanisms_causal++;
    for (int n = 0; n < N; n++) begin
      int ones;
      real rate, e;
      ones = 0;
      for (int t = 0; t < T; t++) begin
        rd(DST + t * N + n, d);
        for (int x = 0; x < DK; x++) ones += int'(d[x]);
      end
      rate = real'(ones) / real'(T * DK);
      e = real'(n + 1) / real'(N);
      checks++;
      if ((n == N - 1 && ones != T * DK) || rate > e + 0.22 || rate < e - 0.22) begin
        failures++; $display("FAIL causal token %0d rate %f exp %f", n, rate, e);
      end
    end
    // ---- 3: short sequence ----
    for (int a = 0; a < T * N; a++) wr(DST + a, '0);
    fill(5, 0);
    run(5, 0);
    mechanisms_short++;
    begin
      int ones;
      real rate;
      ones = 0;
      for (int a = 0; a < T * 5; a++) begin
        rd(DST + a, d);
        for (int x = 0; x < DK; x++) ones += int'(d[x]);
      end
      rate = real'(ones) / real'(T * 5 * DK);
      checks++;
      if (rate < 5.0 / 8.0 - 0.12 || rate > 5.0 / 8.0 + 0.12) begin failures++; $display("FAIL short rate %f", rate); end
      for (int a = T * 5; a < T * N; a++) begin
        rd(DST + a, d);
        checks++;
        if (d !== '0) begin failures++; $display("FAIL write beyond sequence at %0d", a); end
      end
    end
    checks++;
    if (mechanisms_plain == 0 || mechanisms_causal == 0 || mechanisms_short == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
