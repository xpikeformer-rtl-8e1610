// One synaptic array (SA): a 128x128 differential PCM crossbar, its column
// MUX and MUX decoder, NREAD pairs of 5-bit ADCs and NREAD differential
// adders.  For the MUX decoding cycle given by mux_sel it returns, one clock
// later, NREAD signed local dot products
//   local_sum[k] = code(G+ column) - code(G- column)
// of the input spike sub-vector with columns mux_sel*NREAD + k.  The decoder
// address is the same in every SA of a row block, so local sums of the same
// column position line up at the LIF units.
//
// code_sum is the sum of all 2*NREAD ADC codes of the same sample (the total
// source-line current seen by the readout units); the drift-compensation unit
// uses it during calibration.
//
// Timing: in_spk/mux_sel/rd are applied in cycle c; local_sum and code_sum are
// valid in cycle c+1 (ADC sample register).  Structure from the paper; the
// one-cycle read and code_sum are this design's choices.
module synaptic_array #(
  parameter int ROWS  = xp_pkg::XBAR_ROWS,
  parameter int COLS  = xp_pkg::XBAR_COLS,
  parameter int SHARE = xp_pkg::ADC_SHARE,
  parameter int NRD   = COLS / SHARE,
  parameter int AB    = xp_pkg::ADC_BITS,
  parameter int GW    = xp_pkg::G_W,
  parameter int LSB_SHIFT = 2
) (
  input  logic                             clk,
  input  logic                             prog_en,
  input  logic [$clog2(ROWS)-1:0]          prog_row,
  input  logic [$clog2(COLS)-1:0]          prog_col,
  input  logic [GW-1:0]                    prog_gp,
  input  logic [GW-1:0]                    prog_gn,
  input  logic                             rd,
  input  logic [ROWS-1:0]                  in_spk,
  input  logic [$clog2(SHARE)-1:0]         mux_sel,
  input  logic [8:0]                       drift_q8,
  output logic signed [NRD-1:0][AB:0]      local_sum,
  output logic [AB+$clog2(2*NRD):0]        code_sum
);
  localparam int IW = $clog2(ROWS * ((1 << GW) - 1) + 1);

  logic [NRD-1:0][IW-1:0] i_pos, i_neg;
  logic [NRD-1:0][AB-1:0] c_pos, c_neg;

  pcm_crossbar #(.ROWS(ROWS), .COLS(COLS), .GW(GW), .SHARE(SHARE), .NRD(NRD), .IW(IW)) u_xbar (
    .clk, .prog_en, .prog_row, .prog_col, .prog_gp, .prog_gn,
    .wl_on(rd), .in_spk, .mux_sel, .drift_q8, .i_pos, .i_neg);

  for (genvar k = 0; k < NRD; k++) begin : g_rd
    sar_adc #(.ADC_BITS(AB), .LSB_SHIFT(LSB_SHIFT), .IW(IW)) u_adc_p (
      .clk, .sample(rd), .i_in(i_pos[k]), .code(c_pos[k]));
    sar_adc #(.ADC_BITS(AB), .LSB_SHIFT(LSB_SHIFT), .IW(IW)) u_adc_n (
      .clk, .sample(rd), .i_in(i_neg[k]), .code(c_neg[k]));
    // differential adder
    assign local_sum[k] = $signed({1'b0, c_pos[k]}) - $signed({1'b0, c_neg[k]});
  end

  always_comb begin
    code_sum = '0;
    for (int k = 0; k < NRD; k++)
      code_sum += ($bits(code_sum))'(c_pos[k]) + ($bits(code_sum))'(c_neg[k]);
  end
endmodule
