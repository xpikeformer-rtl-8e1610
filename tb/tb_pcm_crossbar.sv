// Self-checking testbench of the pcm_crossbar model (reduced to 16x16 cells,
// sharing ratio 8): random conductances are programmed, then random spike
// vectors, MUX addresses and drift factors are applied and every selected
// source-line current is compared with sum_r in[r]*G[r][col]*drift/256.
module tb_pcm_crossbar;
  localparam int R = 16, C = 16, SH = 8, NRD = C / SH, IW = 8;
  int checks = 0, failures = 0;
  logic clk = 0, prog_en = 0, wl_on = 0;
  logic [3:0] prow, pcol, pgp, pgn;
  logic [R-1:0] in_spk;
  logic [2:0] mux_sel;
  logic [8:0] drift;
  logic [NRD-1:0][IW-1:0] i_pos, i_neg;
  int gp [R][C], gn [R][C];
  always #5 clk = ~clk;
  pcm_crossbar #(.ROWS(R), .COLS(C), .SHARE(SH), .NRD(NRD), .IW(IW)) dut (
    .clk, .prog_en, .prog_row(prow), .prog_col(pcol), .prog_gp(pgp), .prog_gn(pgn),
    .wl_on, .in_spk, .mux_sel, .drift_q8(drift), .i_pos, .i_neg);
  initial begin
    in_spk = '0; mux_sel = '0; drift = 9'd256;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        prog_en = 1; prow = 4'(r); pcol = 4'(c);
        gp[r][c] = $urandom_range(0, 15); gn[r][c] = $urandom_range(0, 15);
        pgp = 4'(gp[r][c]); pgn = 4'(gn[r][c]);
      end
    @(negedge clk); prog_en = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      wl_on   = (n % 7 != 0);
      in_spk  = R'($urandom);
      mux_sel = 3'($urandom_range(0, SH - 1));
      drift   = (n < 150) ? 9'd256 : 9'($urandom_range(128, 256));
      #1;
      for (int k = 0; k < NRD; k++) begin
        int sp, sn, col;
        sp = 0; sn = 0; col = int'(mux_sel) * NRD + k;
        for (int r = 0; r < R; r++) if (in_spk[r]) begin sp += gp[r][col]; sn += gn[r][col]; end
        sp = wl_on ? (sp * int'(drift)) / 256 : 0;
        sn = wl_on ? (sn * int'(drift)) / 256 : 0;
        checks++;
        if (int'(i_pos[k]) != sp || int'(i_neg[k]) != sn) begin
          failures++;
          $display("FAIL n=%0d k=%0d got %0d/%0d exp %0d/%0d", n, k, i_pos[k], i_neg[k], sp, sn);
        end
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
