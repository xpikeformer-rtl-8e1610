// Self-checking testbench of spiking_neuron_tile, reduced to 16x16-cell SAs,
// sharing ratio 4, 2 row blocks of 2 SAs and T <= 4.  Random 5-bit weights
// are programmed through the DAC; random tokens are run and every output
// spike is compared with an independent model of crossbar, ADC, differential
// adder, CSA and LIF (beta = 0.5, fire at V >= threshold, reset to 0).  It
// checks the token latency SHARE*T + 2, then a calibration: reference at no
// drift, drift to 75%, new gain = ref*256/measured, and a token under drift
// with the compensating gain.
module tb_spiking_neuron_tile;
  localparam int R = 16, C = 16, SH = 4, NRD = C / SH, RB = 2, CB = 2, TMAX = 4, NSA = RB * CB;
  localparam int THR = 20;
  int checks = 0, failures = 0, fires = 0;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, thr_we = 0, inb_we = 0, start = 0, cal_start = 0, cal_ref = 0;
  logic [1:0] prog_sa;
  logic [3:0] prog_row, prog_col;
  logic signed [4:0] prog_w;
  logic signed [11:0] thr_in;
  logic [8:0] drift;
  logic [1:0] inb_t, outb_t;
  logic       inb_word, outb_rb;
  logic [R-1:0] inb_data;
  logic [2:0] t_steps;
  logic busy, done;
  logic [C-1:0] outb_data;
  logic [9:0] gain;
  int W [NSA][R][C];
  logic IN [TMAX][CB][R];
  always #5 clk = ~clk;

  spiking_neuron_tile #(.RB(RB), .CB(CB), .ROWS(R), .COLS(C), .SHARE(SH), .TMAX(TMAX), .V_W(12), .CAL_ROWS(8)) dut (
    .clk, .rst_n, .prog_en, .prog_sa, .prog_row, .prog_col, .prog_w, .thr_we, .thr_in,
    .drift_q8(drift), .inb_we, .inb_t, .inb_word, .inb_data, .start, .t_steps,
    .cal_start, .cal_ref, .busy, .done, .outb_t, .outb_rb, .outb_data, .gain);

  function automatic int adc(input int i);
    return ((i >> 2) > 31) ? 31 : (i >> 2);
  endfunction
  function automatic int cur(input int s, input int r, input int c, input bit pos, input int dq);
    int w;
    w = W[s][r][c];
    if (pos) return (w > 0) ? w : 0;
    return (w < 0) ? -w : 0;
  endfunction

  // expected spike of (rb, col) at every t for the current IN, given gain and drift
  task automatic check_token(input int T, input int g, input int dq);
    for (int b = 0; b < RB; b++)
      for (int col = 0; col < C; col++) begin
        int v;
        v = 0;
        for (int t = 0; t < T; t++) begin
          int sum, I, vn;
          logic e;
          sum = 0;
          for (int cb = 0; cb < CB; cb++) begin
            int sp, sn;
            sp = 0; sn = 0;
            for (int r = 0; r < R; r++) if (IN[t][cb][r]) begin
              sp += cur(b*CB + cb, r, col, 1, dq); sn += cur(b*CB + cb, r, col, 0, dq);
            end
            sp = (sp * dq) >> 8; sn = (sn * dq) >> 8;
            sum += adc(sp) - adc(sn);
          end
          I = (sum * g) >>> 8;
          vn = ((t == 0) ? 0 : (v >>> 1)) + I;
          e = (vn >= THR);
          v = e ? 0 : vn;
          outb_t = 2'(t); outb_rb = b[0]; #1;
          checks++;
          fires += int'(e);
          if (outb_data[col] !== e) begin failures++; $display("FAIL rb=%0d col=%0d t=%0d got %0b exp %0b", b, col, t, outb_data[col], e); end
        end
      end
  endtask

  task automatic run_token(input int T, input int g, input int dq);
    int cyc;
    for (int t = 0; t < T; t++)
      for (int cb = 0; cb < CB; cb++) begin
        @(negedge clk);
        inb_we = 1; inb_t = 2'(t); inb_word = cb[0];
        for (int r = 0; r < R; r++) begin IN[t][cb][r] = ($urandom_range(0, 2) == 0); inb_data[r] = IN[t][cb][r]; end
      end
    @(negedge clk); inb_we = 0;
    start = 1; t_steps = 3'(T);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != SH * T + 2) begin failures++; $display("FAIL token latency %0d exp %0d", cyc, SH * T + 2); end
    check_token(T, g, dq);
  endtask

  initial begin
    int ref_sum, meas, eg;
    drift = 9'd256; t_steps = 0; inb_t = 0; inb_word = 0; inb_data = 0; outb_t = 0; outb_rb = 0;
    prog_sa = 0; prog_row = 0; prog_col = 0; prog_w = 0; thr_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSA; s++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          @(negedge clk);
          W[s][r][c] = $urandom_range(0, 30) - 15;
          prog_en = 1; prog_sa = 2'(s); prog_row = 4'(r); prog_col = 4'(c); prog_w = 5'(W[s][r][c]);
        end
    @(negedge clk); prog_en = 0;
    thr_we = 1; thr_in = 12'(THR);
    @(negedge clk); thr_we = 0;
    for (int n = 0; n < 12; n++) run_token((n % TMAX) + 1, 256, 256);
    // calibration: reference
    @(negedge clk); cal_start = 1; cal_ref = 1;
    @(negedge clk); cal_start = 0;
    while (!done) @(negedge clk);
    ref_sum = 0;
    for (int s = 0; s < NSA; s++) for (int k = 0; k < NRD; k++) begin
      int sp, sn;
      sp = 0; sn = 0;
      for (int r = 0; r < 8; r++) begin sp += cur(s, r, k, 1, 256); sn += cur(s, r, k, 0, 256); end
      ref_sum += adc(sp) + adc(sn);
    end
    checks++;
    if (gain != 10'd256) begin failures++; $display("FAIL gain after reference %0d", gain); end
    // drift, then calibrate again
    drift = 9'd192;
    @(negedge clk); cal_start = 1; cal_ref = 0;
    @(negedge clk); cal_start = 0;
    while (!done) @(negedge clk);
    meas = 0;
    for (int s = 0; s < NSA; s++) for (int k = 0; k < NRD; k++) begin
      int sp, sn;
      sp = 0; sn = 0;
      for (int r = 0; r < 8; r++) begin sp += cur(s, r, k, 1, 256); sn += cur(s, r, k, 0, 256); end
      meas += adc((sp * 192) >> 8) + adc((sn * 192) >> 8);
    end
    eg = (ref_sum * 256) / meas;
    if (eg > 1023) eg = 1023;
    checks++;
    if (int'(gain) != eg) begin failures++; $display("FAIL gain %0d exp %0d", gain, eg); end
    checks++;
    if (gain <= 10'd256) begin failures++; $display("FAIL drift not compensated, gain %0d", gain); end
    for (int n = 0; n < 4; n++) run_token(TMAX, int'(gain), 192);
    checks++;
    if (fires == 0) begin failures++; $display("FAIL no spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
