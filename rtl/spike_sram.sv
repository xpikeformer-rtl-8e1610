// Shared on-chip SRAM of the accelerator: DEPTH words of WORD_W bits holding
// the spike vectors exchanged between the AIMC engine, the SSA engine and the
// host (layer inputs and outputs, Q/K/V and attention results).
// Single port, one request per clock: a write updates the bits selected by
// wmask; a read returns the word on rdata in the next cycle.  Address bits
// above log2(DEPTH) are ignored.
// The paper names the shared SRAM only; size, width and port are this
// design's choices.  Written as an array, so it maps onto an SRAM macro.
module spike_sram
  import xp_pkg::*;
#(
  parameter int DEPTH = 16384
) (
  input  logic              clk,
  input  sram_req_t         req,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req.en) begin
      if (req.we)
        mem[req.addr[$clog2(DEPTH)-1:0]] <= (mem[req.addr[$clog2(DEPTH)-1:0]] & ~req.wmask)
                                          | (req.wdata & req.wmask);
      else
        rdata <= mem[req.addr[$clog2(DEPTH)-1:0]];
    end
  end

endmodule
