// Behavioural model of one readout unit: a current-mode sense amplifier with
// a successive-approximation ADC.  The source-line current (integer units of
// one conductance level) is sampled on the rising clock edge and quantised to
// ADC_BITS bits with an LSB of 2^LSB_SHIFT units, saturating at full scale:
//   code = min(2^ADC_BITS - 1, i_in >> LSB_SHIFT).
// The 5-bit resolution is the paper's; the LSB size and the one-cycle
// conversion are this design's choices.
module sar_adc #(
  parameter int ADC_BITS  = xp_pkg::ADC_BITS,
  parameter int LSB_SHIFT = 2,
  parameter int IW        = xp_pkg::I_W
) (
  input  logic                clk,
  input  logic                sample,
  input  logic [IW-1:0]       i_in,
  output logic [ADC_BITS-1:0] code
);
  localparam int FULL = (1 << ADC_BITS) - 1;
  logic [IW-1:0] q;
  assign q = i_in >> LSB_SHIFT;

  always_ff @(posedge clk) begin
    if (sample) code <= (q > IW'(FULL)) ? ADC_BITS'(FULL) : q[ADC_BITS-1:0];
  end
endmodule
