// LFSR array: NUM independent 32-bit LFSRs (lfsr32) with distinct seeds,
// each tapped as four bytes, giving 4*NUM pseudo-random bytes per enabled
// clock on prn[].  The SSA engine uses one array, advanced once per d_K
// cycles, for the attention-score encoders inside the SACs, and one advanced
// every cycle for the column encoders.  Seeds are SEED_BASE mixed with the
// index by a multiplicative hash (this design's choice).
module lfsr_array #(
  parameter int          NUM       = 4,
  parameter logic [31:0] SEED_BASE = 32'h1234_5678
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  output logic [4*NUM-1:0][7:0] prn
);
  for (genvar i = 0; i < NUM; i++) begin : g_l
    localparam logic [31:0] SEED = SEED_BASE ^ (32'(i + 1) * 32'h9E37_79B9);
    logic [31:0] st;
    lfsr32 #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en, .state(st));
    assign prn[4*i +: 4] = st;
  end
endmodule
