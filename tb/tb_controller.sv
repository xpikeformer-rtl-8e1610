// Self-checking testbench of controller: random commands with engine models
// that answer after random delays.  Checks the handshake (a command is taken
// only while idle), the start pulse of the right engine, the SRAM port given
// to the running engine or, when idle, to the host, the done pulse and the
// per-kind command counters.
module tb_controller;
  import xp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  cmd_t cmd, eng_cmd;
  logic cmd_ready, busy, done, aimc_start, ssa_start, aimc_done = 0, ssa_done = 0, host_gnt;
  sram_req_t host_req, aimc_req, ssa_req, mem_req;
  logic [15:0] n_aimc, n_ssa, n_cal;
  int ea = 0, es = 0, ec = 0;
  always #5 clk = ~clk;
  controller dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .busy, .done,
    .aimc_start, .ssa_start, .eng_cmd, .aimc_done, .ssa_done,
    .host_req, .aimc_req, .ssa_req, .mem_req, .host_gnt, .n_aimc, .n_ssa, .n_cal);

  initial begin
    host_req = '0; aimc_req = '0; ssa_req = '0; cmd = '0;
    host_req.addr = 16'h1111; aimc_req.addr = 16'h2222; ssa_req.addr = 16'h3333;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int k, dly;
      @(negedge clk);
      checks++;
      if (!cmd_ready || !host_gnt || mem_req.addr != 16'h1111) begin failures++; $display("FAIL idle state n=%0d", n); end
      k = $urandom_range(0, 2);
      cmd = '0; cmd.op = op_e'(k); cmd.src_base = 16'(n);
      cmd_valid = 1;
      #1;
      checks++;
      if (aimc_start != (k != 1) || ssa_start != (k == 1) || eng_cmd.src_base != 16'(n)) begin
        failures++; $display("FAIL start n=%0d", n);
      end
      @(negedge clk);
      cmd_valid = 0;
      if (k == 0) ea++; else if (k == 1) es++; else ec++;
      dly = $urandom_range(1, 6);
      for (int i = 0; i < dly; i++) begin
        // a second command must be refused while busy
        cmd_valid = 1; #1;
        checks++;
        if (cmd_ready || aimc_start || ssa_start || host_gnt) begin failures++; $display("FAIL busy n=%0d", n); end
        checks++;
        if (mem_req.addr != ((k == 1) ? 16'h3333 : 16'h2222)) begin failures++; $display("FAIL mux n=%0d", n); end
        @(negedge clk);
      end
      cmd_valid = 0;
      if (k == 1) ssa_done = 1; else aimc_done = 1;
      @(negedge clk);
      ssa_done = 0; aimc_done = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL done n=%0d", n); end
    end
    checks++;
    if (int'(n_aimc) != ea || int'(n_ssa) != es || int'(n_cal) != ec) begin failures++; $display("FAIL counters"); end
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
