// Self-checking testbench of spike_sram: random masked writes and reads
// against a shadow array; read data must appear one cycle after the request.
module tb_spike_sram;
  import xp_pkg::*;
  localparam int DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  sram_req_t req;
  logic [WORD_W-1:0] rdata, shadow [DEPTH];
  always #5 clk = ~clk;
  spike_sram #(.DEPTH(DEPTH)) dut (.clk, .req, .rdata);

  function automatic logic [WORD_W-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    req = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      req = '{en: 1, we: 1, addr: ADDR_W'(a), wdata: rnd(), wmask: '1};
      shadow[a] = req.wdata;
    end
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      req.en   = 1;
      req.we   = $urandom_range(0, 1);
      req.addr = ADDR_W'($urandom_range(0, DEPTH - 1));
      req.wdata = rnd();
      req.wmask = rnd();
      if (req.we) begin
        shadow[req.addr] = (shadow[req.addr] & ~req.wmask) | (req.wdata & req.wmask);
      end else begin
        automatic logic [WORD_W-1:0] e = shadow[req.addr];
        @(negedge clk);
        req.en = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL read %0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
