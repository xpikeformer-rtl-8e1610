// End-to-end testbench of xpikeformer_top: 2 spiking neuron tiles of 2x4
// 128x128 SAs at full size, and 2 SSA tiles reduced to 16x16 SACs with
// d_K = 16 so that the simulation model builds in minutes (the top's
// defaults are N = d_K = 64).  It plays one
// attention block of a spiking transformer:
//   program weights -> AIMC layer L1 (random weights, random input)
//   -> AIMC QKV projection over a 2-tile virtual block (N tokens)
//   -> SSA, both heads, non-causal -> SSA causal -> AIMC layer on the
//   attention output -> calibration with reference, PCM drift, calibration
//   with gain update -> L1 again under drift with compensation.
// AIMC outputs are compared bit by bit with an independent model of
// crossbar, 5-bit ADC, differential adder, CSA and LIF.  The QKV weights make
// Q, K and V deterministic (all-on / all-off features), so the non-causal
// attention result is exact (A[d,i] = V[d] for head 0, 0 for head 1) and the
// causal one has known rates.  Each mechanism is counted and must occur.
module tb_xpikeformer_top;
  import xp_pkg::*;
  // SSA size under test (the top's defaults are N = DK = 64); the AIMC side
  // always runs at full size
  localparam int N = 16, DK = 16;
  localparam int NT = 2, RB = 2, CB = 4, T = 4, THR = 20;
  localparam int PROG_ROWS = 64;
  // SRAM map (word addresses)
  localparam int X1 = 0, Y1 = 64, XQ = 256, QKV = 1024, ATT = 2048, Y3 = 4096;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, done, host_gnt;
  cmd_t cmd;
  sram_req_t host_req;
  logic [WORD_W-1:0] host_rdata;
  logic prog_en = 0, thr_we = 0;
  logic [3:0] prog_tile = 0, thr_tile = 0;
  logic [2:0] prog_sa = 0;
  logic [6:0] prog_row = 0, prog_col = 0;
  logic signed [4:0] prog_w = 0;
  logic signed [11:0] thr_in = 0;
  logic [8:0] drift = 9'd256;
  logic [NT-1:0][9:0] gdc_gain;
  logic [15:0] ssa_lat, n_aimc, n_ssa, n_cal;

  // mechanism counters
  int m_aimc = 0, m_vblock2 = 0, m_ssa = 0, m_causal = 0, m_cal_ref = 0, m_cal_upd = 0;
  int m_fire = 0, m_adc_sat = 0, m_refused = 0, m_alternate = 0;

  int W [NT][RB*CB][PROG_ROWS][128];
  logic vpat [DK];
  logic [WORD_W-1:0] xin [N][T];

  always #5 clk = ~clk;

  xpikeformer_top #(.N(N), .DK(DK)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .busy, .done,
    .host_req, .host_rdata, .host_gnt,
    .prog_en, .prog_tile, .prog_sa, .prog_row, .prog_col, .prog_w,
    .thr_we, .thr_tile, .thr_in, .pcm_drift_q8(drift),
    .gdc_gain, .ssa_first_latency(ssa_lat), .n_aimc, .n_ssa, .n_cal);

  function automatic int adc(input int i);
    return ((i >> 2) > 31) ? 31 : (i >> 2);
  endfunction

  task automatic hwr(input int a, input logic [WORD_W-1:0] d);
    @(negedge clk);
    host_req = '{en: 1, we: 1, addr: ADDR_W'(a), wdata: d, wmask: '1};
    @(negedge clk); host_req = '0;
  endtask
  task automatic hrd(input int a, output logic [WORD_W-1:0] d);
    @(negedge clk);
    host_req = '{en: 1, we: 0, addr: ADDR_W'(a), wdata: '0, wmask: '0};
    @(negedge clk); host_req = '0; d = host_rdata;
  endtask

  task automatic issue(input cmd_t c);
    @(negedge clk);
    $display("[%0t] command op=%0d n_tok=%0d tiles %0d+%0d", $time, c.op, c.n_tok, c.tile_first, c.tile_num);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    // a second command offered while busy must wait
    cmd_valid = 1; #1;
    if (!cmd_ready) m_refused++;
    checks++;
    if (cmd_ready) begin failures++; $display("FAIL command accepted while busy"); end
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  function automatic cmd_t aimc_cmd(input int src, input int dst, input int dwpv, input int ntok,
                                    input int tf, input int tn);
    cmd_t c;
    c = '0; c.op = OP_AIMC; c.src_base = ADDR_W'(src); c.src_wpv = 1; c.dst_base = ADDR_W'(dst);
    c.dst_wpv = 4'(dwpv); c.n_tok = 8'(ntok); c.t_steps = 5'(T); c.in_words = 1;
    c.tile_first = 4'(tf); c.tile_num = 4'(tn);
    return c;
  endfunction

  // compare an AIMC layer's output in SRAM with the reference model
  task automatic check_layer(input int src, input int dst, input int dwpv, input int ntok,
                             input int tf, input int tn, input int dq, input string tag);
    int errs;
    errs = 0;
    for (int n = 0; n < ntok; n++) begin
      logic [WORD_W-1:0] x [T];
      int v [512];
      int ilog [512][T];
      for (int t = 0; t < T; t++) hrd(src + t * ntok + n, x[t]);
      for (int f = 0; f < 512; f++) v[f] = 0;
      for (int t = 0; t < T; t++)
        for (int w = 0; w < 2 * tn; w++) begin
          logic [WORD_W-1:0] y;
          hrd(dst + (t * ntok + n) * dwpv + w, y);
          for (int col = 0; col < 128; col++) begin
            int f, j, b, sp, sn, g, I, vn;
            logic e;
            f = w * 128 + col; j = tf + w / 2; b = w % 2;
            sp = 0; sn = 0;
            for (int r = 0; r < 128; r++) if (x[t][r]) begin
              int wt;
              wt = W[j][b*CB][r][col];
              if (wt > 0) sp += wt; else sn -= wt;
            end
            sp = (sp * dq) >> 8; sn = (sn * dq) >> 8;
            if ((sp >> 2) > 31 || (sn >> 2) > 31) m_adc_sat++;
            g = int'(gdc_gain[j]);
            I = ((adc(sp) - adc(sn)) * g) >>> 8;
            vn = ((t == 0) ? 0 : (v[f] >>> 1)) + I;
            ilog[f][t] = I;
            e = (vn >= THR);
            v[f] = e ? 0 : vn;
            m_fire += int'(e);
            checks++;
            if (y[col] !== e) begin
              failures++; errs++;
              if (errs < 6) $display("FAIL %s n=%0d t=%0d f=%0d got %0b exp %0b (adc %0d-%0d gain %0d I %0d V %0d)",
                                     tag, n, t, f, y[col], e, adc(sp), adc(sn), g, I, vn);
              if (errs < 6) for (int tt = 0; tt <= t; tt++) $display("   t=%0d I=%0d", tt, ilog[f][tt]);
            end
          end
        end
    end
  endtask

  initial begin
    cmd_t c;
    logic [WORD_W-1:0] d;
    int cal_ref_sum, cal_meas, eg;
    host_req = '0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- weights ----------------
    // rows 0..7: random; rows 8..15: QKV pattern; rows 16..63 (tile 0, cb 0): random
    for (int d2 = 0; d2 < DK; d2++) vpat[d2] = ($urandom_range(0, 1) == 1);
    for (int j = 0; j < NT; j++)
      for (int s = 0; s < RB * CB; s++)
        for (int r = 0; r < ((j == 0 && s % CB == 0) ? PROG_ROWS : 16); r++)
          for (int col = 0; col < 128; col++) begin
            int f, w;
            f = j * 256 + (s / CB) * 128 + col;
            if (r >= 8 && r < 16) begin
              if (f < DK)                    w = 15;                       // Q head 0 on
              else if (f < 128)              w = -15;                      // Q head 1 off
              else if (f < 256)              w = 15;                       // K on
              else if (f < 256 + 2 * DK)     w = vpat[f % DK] ? 15 : -15;  // V pattern
              else                           w = -15;
            end else w = $urandom_range(0, 30) - 15;
            W[j][s][r][col] = w;
            @(negedge clk);
            prog_en = 1; prog_tile = 4'(j); prog_sa = 3'(s); prog_row = 7'(r); prog_col = 7'(col); prog_w = 5'(w);
          end
    @(negedge clk); prog_en = 0;
    for (int j = 0; j < NT; j++) begin
      @(negedge clk); thr_we = 1; thr_tile = 4'(j); thr_in = 12'(THR);
    end
    @(negedge clk); thr_we = 0;

    // ---------------- AIMC layer L1: random ----------------
    for (int t = 0; t < T; t++) for (int n = 0; n < 4; n++) begin
      d = '0;
      for (int r = 0; r < 8; r++) d[r] = ($urandom_range(0, 1) == 1);
      hwr(X1 + t * 4 + n, d);
    end
    issue(aimc_cmd(X1, Y1, 2, 4, 0, 1));
    m_aimc++;
    check_layer(X1, Y1, 2, 4, 0, 1, 256, "L1");

    // ---------------- QKV projection over tiles 0..1 ----------------
    for (int t = 0; t < T; t++) for (int n = 0; n < N; n++) hwr(XQ + t * N + n, 128'hFF00);
    issue(aimc_cmd(XQ, QKV, 4, N, 0, 2));
    m_aimc++; m_vblock2++; m_alternate++;
    check_layer(XQ, QKV, 4, N, 0, 2, 256, "QKV");

    // ---------------- SSA, both heads, non-causal ----------------
    c = '0; c.op = OP_SSA; c.src_base = QKV; c.src_wpv = 4; c.dst_base = ATT; c.dst_wpv = 1;
    c.n_tok = 8'(N); c.t_steps = 5'(T); c.head_base = 0; c.dmodel_words = 1; c.causal = 0;
    issue(c);
    m_ssa++; m_alternate++;
    checks++;
    if (ssa_lat != 16'(DK + 1)) begin failures++; $display("FAIL SSA latency %0d", ssa_lat); end
    for (int a = 0; a < T * N; a++) begin
      hrd(ATT + a, d);
      for (int x = 0; x < DK; x++) begin
        checks++;
        if (d[x] !== vpat[x]) begin failures++; $display("FAIL attention head0 a=%0d d=%0d", a, x); end
        checks++;
        if (d[DK + x] !== 1'b0) begin failures++; $display("FAIL attention head1 a=%0d d=%0d", a, x); end
      end
    end

    // ---------------- AIMC layer on the attention output ----------------
    issue(aimc_cmd(ATT, Y3, 2, N, 0, 1));
    m_aimc++; m_alternate++;
    check_layer(ATT, Y3, 2, N, 0, 1, 256, "FF");

    // ---------------- SSA causal ----------------
    c.causal = 1; c.dst_base = ATT + 512;
    issue(c);
    m_causal++;
    begin
      int on_ones, on_total;
      on_ones = 0; on_total = 0;
      for (int t = 0; t < T; t++) for (int n = 0; n < N; n++) begin
        hrd(ATT + 512 + t * N + n, d);
        for (int x = 0; x < DK; x++) begin
          if (!vpat[x] || n == N - 1) begin
            checks++;
            if (d[x] !== vpat[x]) begin failures++; $display("FAIL causal exact t=%0d n=%0d d=%0d", t, n, x); end
          end else begin
            on_total++; on_ones += int'(d[x]);
          end
          checks++;
          if (d[DK + x] !== 1'b0) begin failures++; $display("FAIL causal head1"); end
        end
      end
      // mean of (n+1)/N over n = 0..N-2
      checks++;
      if (on_total > 0 && (real'(on_ones) / real'(on_total) < 0.40 || real'(on_ones) / real'(on_total) > 0.60)) begin
        failures++; $display("FAIL causal rate %f", real'(on_ones) / real'(on_total));
      end
    end

    // ---------------- drift compensation ----------------
    c = '0; c.op = OP_CAL; c.tile_first = 0; c.tile_num = 2; c.cal_ref = 1;
    issue(c);
    m_cal_ref++;
    drift = 9'd200;
    c.cal_ref = 0;
    issue(c);
    for (int j = 0; j < NT; j++) begin
      cal_ref_sum = 0; cal_meas = 0;
      for (int s = 0; s < RB * CB; s++) for (int k = 0; k < 16; k++) begin
        int sp, sn;
        sp = 0; sn = 0;
        for (int r = 0; r < 8; r++) begin
          if (W[j][s][r][k] > 0) sp += W[j][s][r][k]; else sn -= W[j][s][r][k];
        end
        cal_ref_sum += adc(sp) + adc(sn);
        cal_meas    += adc((sp * 200) >> 8) + adc((sn * 200) >> 8);
      end
      eg = (cal_ref_sum * 256) / cal_meas;
      if (eg > 1023) eg = 1023;
      checks++;
      if (int'(gdc_gain[j]) != eg) begin failures++; $display("FAIL gain tile %0d = %0d exp %0d", j, gdc_gain[j], eg); end
      if (gdc_gain[j] != 10'd256) m_cal_upd++;
    end
    issue(aimc_cmd(X1, Y1 + 64, 2, 4, 0, 1));
    m_aimc++;
    check_layer(X1, Y1 + 64, 2, 4, 0, 1, 200, "L1-drift");

    checks++;
    if (int'(n_aimc) != m_aimc || int'(n_ssa) != m_ssa + m_causal || int'(n_cal) != 2) begin
      failures++; $display("FAIL command counters %0d %0d %0d", n_aimc, n_ssa, n_cal);
    end
    $display("mechanisms: aimc_layers=%0d two_tile_block=%0d ssa=%0d ssa_causal=%0d cal_ref=%0d cal_gain_update=%0d lif_fires=%0d adc_saturations=%0d busy_refusals=%0d engine_switches=%0d",
             m_aimc, m_vblock2, m_ssa, m_causal, m_cal_ref, m_cal_upd, m_fire, m_adc_sat, m_refused, m_alternate);
    if (m_aimc == 0) begin failures++; $display("FAIL mechanism aimc never happened"); end
    if (m_vblock2 == 0) begin failures++; $display("FAIL mechanism two-tile block never happened"); end
    if (m_ssa == 0) begin failures++; $display("FAIL mechanism ssa never happened"); end
    if (m_causal == 0) begin failures++; $display("FAIL mechanism causal never happened"); end
    if (m_cal_ref == 0) begin failures++; $display("FAIL mechanism cal ref never happened"); end
    if (m_cal_upd == 0) begin failures++; $display("FAIL mechanism gain update never happened"); end
    if (m_fire == 0) begin failures++; $display("FAIL mechanism LIF fire never happened"); end
    if (m_adc_sat == 0) begin failures++; $display("FAIL mechanism ADC saturation never happened"); end
    if (m_refused == 0) begin failures++; $display("FAIL mechanism busy refusal never happened"); end
    if (m_alternate == 0) begin failures++; $display("FAIL mechanism engine switch never happened"); end
    checks += 10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
