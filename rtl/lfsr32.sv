// 32-bit Fibonacci LFSR, polynomial x^32 + x^22 + x^2 + x + 1 (maximal
// length).  When en is high it advances STEP positions per clock, so all four
// bytes of the register hold fresh bits each cycle and can be tapped as four
// 8-bit pseudo-random numbers.  The 32-bit width and the tapping of all four
// bytes are the paper's; the polynomial and the step are this design's
// choices.  An all-zero SEED is replaced by 1.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'h1,
  parameter int          STEP = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] state
);
  localparam logic [31:0] S0 = (SEED == 32'h0) ? 32'h1 : SEED;
  logic [31:0] nxt;
  always_comb begin
    nxt = state;
    for (int i = 0; i < STEP; i++)
      nxt = {nxt[30:0], nxt[31] ^ nxt[21] ^ nxt[1] ^ nxt[0]};
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= S0;
    else if (en) state <= nxt;
  end
endmodule
