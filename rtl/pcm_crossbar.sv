// Behavioural model (not synthesizable as analog): PCM crossbar of one
// synaptic array together with its switch matrices and the column MUX.
//
// The array holds ROWS x COLS differential cells; each cell is a pair of PCM
// devices G+ and G- on the same bit line, programmed to one of 2^G_W
// conductance levels, so a cell stores a signed weight G+ - G-.  In inference
// all word lines are on (wl_on) and the binary input spikes drive the bit
// lines; every source line sums the conductances of the rows whose input is 1
// (Ohm's and Kirchhoff's laws).  The MUX connects the NREAD column pairs of
// decoding cycle mux_sel to the readout units: readout unit k sees columns
// mux_sel*NREAD + k, so one MUX cycle yields NREAD consecutive outputs.
//
// Currents are modelled as integers in units of one conductance level.
// drift_q8 is a model-only environment input standing for global conductance
// drift: every current is scaled by drift_q8/256 (256 = freshly programmed).
// Device noise and variability are not modelled.
//
// Programming (through the tile's DAC) writes one cell per clock when prog_en
// is high.  Read-out is combinational; the ADCs sample it on the clock edge.
module pcm_crossbar #(
  parameter int ROWS  = xp_pkg::XBAR_ROWS,
  parameter int COLS  = xp_pkg::XBAR_COLS,
  parameter int GW    = xp_pkg::G_W,
  parameter int SHARE = xp_pkg::ADC_SHARE,
  parameter int NRD   = COLS / SHARE,
  parameter int IW    = $clog2(ROWS * ((1 << GW) - 1) + 1)
) (
  input  logic                       clk,
  // programming port (driven by the shared DAC)
  input  logic                       prog_en,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [$clog2(COLS)-1:0]    prog_col,
  input  logic [GW-1:0]              prog_gp,
  input  logic [GW-1:0]              prog_gn,
  // inference
  input  logic                       wl_on,
  input  logic [ROWS-1:0]            in_spk,
  input  logic [$clog2(SHARE)-1:0]   mux_sel,
  input  logic [8:0]                 drift_q8,
  output logic [NRD-1:0][IW-1:0]     i_pos,
  output logic [NRD-1:0][IW-1:0]     i_neg
);
  logic [GW-1:0] gp [ROWS][COLS];
  logic [GW-1:0] gn [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      gp[prog_row][prog_col] <= prog_gp;
      gn[prog_row][prog_col] <= prog_gn;
    end
  end

  always_comb begin
    int unsigned sp, sn, col;
    col = 0;
    for (int k = 0; k < NRD; k++) begin
      sp = 0;
      sn = 0;
      if (wl_on) begin
        col = int'(mux_sel) * NRD + k;
        for (int r = 0; r < ROWS; r++) begin
          if (in_spk[r]) begin
            sp += int'(gp[r][col]);
            sn += int'(gn[r][col]);
          end
        end
        sp = (sp * int'(drift_q8)) >> 8;
        sn = (sn * int'(drift_q8)) >> 8;
        if (sp > (1 << IW) - 1) sp = (1 << IW) - 1;
        if (sn > (1 << IW) - 1) sn = (1 << IW) - 1;
      end
      i_pos[k] = IW'(sp);
      i_neg[k] = IW'(sn);
    end
  end
endmodule
