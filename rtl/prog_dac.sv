// Behavioural model of the shared programming DAC of a spiking neuron tile.
// It turns a signed W_BITS weight into the target conductance levels of the
// two devices of a differential cell: a positive weight goes to G+, a negative
// one to G-, the other device stays at level 0.  The most negative code is
// clipped to -(2^G_W - 1) so that both signs have the same range.  The DAC is
// only used while weights are programmed; inference bypasses it.
// The level mapping is this design's choice; the paper gives the 5-bit weight,
// the 4-bit devices and the differential pair.
module prog_dac #(
  parameter int WB = xp_pkg::W_BITS,
  parameter int GW = xp_pkg::G_W
) (
  input  logic signed [WB-1:0] w,
  output logic        [GW-1:0] gp,
  output logic        [GW-1:0] gn
);
  localparam int GMAX = (1 << GW) - 1;
  always_comb begin
    int mag;
    mag = (w < 0) ? -int'(w) : int'(w);
    if (mag > GMAX) mag = GMAX;
    gp = (w >= 0) ? GW'(mag) : '0;
    gn = (w <  0) ? GW'(mag) : '0;
  end
endmodule
