// Bernoulli encoder: a comparator that turns an unnormalised count into a
// spike whose probability is value / I_MAX.  The count is compared with a
// pseudo-random integer r drawn uniformly from 1..I_MAX; value >= r is written
// here as value > prn with prn = r - 1 taken directly from PRN_W = log2(I_MAX)
// random bits, so no normalisation hardware is needed when I_MAX is a power of
// two (as the paper recommends).  Combinational.
module bernoulli_encoder #(
  parameter int VAL_W = 8,
  parameter int PRN_W = 6
) (
  input  logic [VAL_W-1:0] value,
  input  logic [PRN_W-1:0] prn,
  output logic             spike
);
  localparam int CW = (VAL_W > PRN_W) ? VAL_W : PRN_W;
  assign spike = CW'(value) > CW'(prn);
endmodule
