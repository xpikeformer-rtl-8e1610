// Self-checking testbench of synaptic_array (reduced to 32x32 cells, sharing
// ratio 8, so 4 readout units): random weights are programmed as
// differential pairs, random input spikes are read, and one clock later each
// local sum must be sat(I+ >> 2) - sat(I- >> 2) of the columns the MUX
// address selects; code_sum must be the sum of all codes.
module tb_synaptic_array;
  localparam int R = 32, C = 32, SH = 8, NRD = C / SH;
  int checks = 0, failures = 0, sat_seen = 0;
  logic clk = 0, prog_en = 0, rd = 0;
  logic [4:0] prow, pcol;
  logic [3:0] pgp, pgn;
  logic [R-1:0] in_spk;
  logic [2:0] mux_sel;
  logic signed [NRD-1:0][5:0] local_sum;
  logic [5+$clog2(2*NRD):0] code_sum;
  int gp [R][C], gn [R][C];
  int exp_ls [NRD];
  int exp_cs;
  always #5 clk = ~clk;
  synaptic_array #(.ROWS(R), .COLS(C), .SHARE(SH), .NRD(NRD)) dut (
    .clk, .prog_en, .prog_row(prow), .prog_col(pcol), .prog_gp(pgp), .prog_gn(pgn),
    .rd, .in_spk, .mux_sel, .drift_q8(9'd256), .local_sum, .code_sum);

  function automatic int adc(input int i);
    return ((i >> 2) > 31) ? 31 : (i >> 2);
  endfunction

  initial begin
    in_spk = '0; mux_sel = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int w;
        @(negedge clk);
        w = $urandom_range(0, 30) - 15;
        gp[r][c] = (w > 0) ? w : 0; gn[r][c] = (w < 0) ? -w : 0;
        prog_en = 1; prow = 5'(r); pcol = 5'(c); pgp = 4'(gp[r][c]); pgn = 4'(gn[r][c]);
      end
    @(negedge clk); prog_en = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      rd = 1;
      in_spk  = (n % 3 == 0) ? R'({$urandom} & {$urandom}) : R'($urandom);
      mux_sel = 3'($urandom_range(0, SH - 1));
      exp_cs = 0;
      for (int k = 0; k < NRD; k++) begin
        int sp, sn;
        sp = 0; sn = 0;
        for (int r = 0; r < R; r++) if (in_spk[r]) begin
          sp += gp[r][int'(mux_sel) * NRD + k]; sn += gn[r][int'(mux_sel) * NRD + k];
        end
        if (sp >= 128 || sn >= 128) sat_seen++;
        exp_ls[k] = adc(sp) - adc(sn);
        exp_cs += adc(sp) + adc(sn);
      end
      @(negedge clk);
      rd = 0;
      for (int k = 0; k < NRD; k++) begin
        checks++;
        if (int'(signed'(local_sum[k])) != exp_ls[k]) begin
          failures++; $display("FAIL n=%0d k=%0d got %0d exp %0d", n, k, signed'(local_sum[k]), exp_ls[k]);
        end
      end
      checks++;
      if (int'(code_sum) != exp_cs) begin failures++; $display("FAIL code_sum %0d exp %0d", code_sum, exp_cs); end
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL ADC saturation never exercised"); end
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
