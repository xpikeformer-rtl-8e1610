// Spiking neuron tile of the AIMC engine.
// The tile holds RB row blocks of CB synaptic arrays each (SA rb-cb), one
// group of NRD LIF units per row block, a shared programming DAC, an input
// buffer, an output buffer and a drift-compensation unit.  With row-block-wise
// mapping, row block rb stores rows rb*COLS.. of a layer's weight matrix
// (transposed onto the crossbar columns) and column block cb the input
// features cb*ROWS..; the local sums of the CB arrays of a row block go
// straight to the LIF units, so no pre-activation is ever buffered.
//
// Operation for one token (start): the input buffer holds the token's T input
// spike vectors (CB words of ROWS bits per time step).  For each MUX decoding
// cycle m = 0..SHARE-1 the tile plays the T time steps in order, one per
// clock; LIF unit k of row block rb then integrates output neuron
// rb*COLS + m*NRD + k over T steps and is cleared when m changes.  The spikes
// are written to the output buffer, RB words of COLS bits per time step.
// A token takes SHARE*T + 2 cycles from start to done.
//
// Calibration (cal_start): one read with the fixed pattern "rows
// 0..CAL_ROWS-1 active" on every SA in MUX cycle 0; the sum of all ADC codes
// goes to the GDC unit, which stores it as reference (cal_ref) or derives a
// new gain.  done pulses when the gain is ready.
//
// Structure, mapping and the beta=0.5 LIF follow the paper.  The loop order
// (MUX cycle outside, time step inside, which needs one membrane register per
// LIF unit), the buffers' organisation and the calibration pattern are this
// design's choices.
module spiking_neuron_tile #(
  parameter int RB    = 2,
  parameter int CB    = 4,
  parameter int ROWS  = xp_pkg::XBAR_ROWS,
  parameter int COLS  = xp_pkg::XBAR_COLS,
  parameter int SHARE = xp_pkg::ADC_SHARE,
  parameter int TMAX  = 16,
  parameter int V_W   = 12,
  parameter int LSB_SHIFT = 2,
  parameter int CAL_ROWS  = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight programming through the shared DAC
  input  logic                         prog_en,
  input  logic [$clog2(RB*CB)-1:0]     prog_sa,
  input  logic [$clog2(ROWS)-1:0]      prog_row,
  input  logic [$clog2(COLS)-1:0]      prog_col,
  input  logic signed [xp_pkg::W_BITS-1:0] prog_w,
  input  logic                         thr_we,
  input  logic signed [V_W-1:0]        thr_in,
  input  logic [8:0]                   drift_q8,
  // input buffer write
  input  logic                         inb_we,
  input  logic [$clog2(TMAX)-1:0]      inb_t,
  input  logic [$clog2(CB)-1:0]        inb_word,
  input  logic [ROWS-1:0]              inb_data,
  // control
  input  logic                         start,
  input  logic [$clog2(TMAX+1)-1:0]    t_steps,
  input  logic                         cal_start,
  input  logic                         cal_ref,
  output logic                         busy,
  output logic                         done,
  // output buffer read
  input  logic [$clog2(TMAX)-1:0]      outb_t,
  input  logic [$clog2(RB)-1:0]        outb_rb,
  output logic [COLS-1:0]              outb_data,
  output logic [9:0]                   gain
);
  localparam int NSA = RB * CB;
  localparam int NRD = COLS / SHARE;
  localparam int AB  = xp_pkg::ADC_BITS;
  localparam int GW  = xp_pkg::G_W;
  localparam int CSW = AB + $clog2(2 * NRD) + 1;       // code_sum width per SA
  localparam int TSW = CSW + $clog2(NSA) + 1;          // tile calibration sum

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_CAL_RD, S_CAL_SUM, S_CAL_WAIT} state_e;
  state_e state;

  logic [ROWS-1:0] inb  [TMAX][CB];
  logic [COLS-1:0] outb [TMAX][RB];

  logic [$clog2(SHARE)-1:0]   m_q, m1;
  logic [$clog2(TMAX+1)-1:0]  t_q, t1, tsteps_q;
  logic                       v1, first1;
  logic                       gdc_busy;

  // ---------------- shared DAC ----------------
  logic [GW-1:0] dac_gp, dac_gn;
  prog_dac u_dac (.w(prog_w), .gp(dac_gp), .gn(dac_gn));

  // ---------------- synaptic arrays ----------------
  logic                          rd;
  logic [$clog2(SHARE)-1:0]      mux_sel;
  logic [NSA-1:0][ROWS-1:0]      sa_in;
  logic signed [NSA-1:0][NRD-1:0][AB:0] sa_sum;
  logic [NSA-1:0][CSW-1:0]       sa_csum;
  logic [ROWS-1:0]               cal_pat;

  always_comb begin
    cal_pat = '0;
    for (int r = 0; r < CAL_ROWS; r++) cal_pat[r] = 1'b1;
  end

  assign rd      = (state == S_RUN) || (state == S_CAL_RD);
  assign mux_sel = (state == S_RUN) ? m_q : '0;

  for (genvar s = 0; s < NSA; s++) begin : g_sa
    assign sa_in[s] = (state == S_CAL_RD) ? cal_pat
                                          : inb[t_q[$clog2(TMAX)-1:0]][s % CB];
    synaptic_array #(.ROWS(ROWS), .COLS(COLS), .SHARE(SHARE), .NRD(NRD), .LSB_SHIFT(LSB_SHIFT)) u_sa (
      .clk, .prog_en(prog_en && (prog_sa == ($clog2(NSA))'(s))),
      .prog_row, .prog_col, .prog_gp(dac_gp), .prog_gn(dac_gn),
      .rd, .in_spk(sa_in[s]), .mux_sel, .drift_q8,
      .local_sum(sa_sum[s]), .code_sum(sa_csum[s]));
  end

  // ---------------- LIF units ----------------
  logic [RB-1:0][NRD-1:0] spk;
  for (genvar b = 0; b < RB; b++) begin : g_rb
    for (genvar k = 0; k < NRD; k++) begin : g_lif
      logic signed [CB-1:0][AB:0] ls;
      for (genvar c = 0; c < CB; c++) begin : g_c
        assign ls[c] = sa_sum[b*CB + c][k];
      end
      lif_unit #(.NIN(CB), .IN_W(AB + 1), .V_W(V_W)) u_lif (
        .clk, .rst_n, .thr_we, .thr_in, .gain,
        .valid(v1), .clear(first1), .local_sum(ls), .spike(spk[b][k]), .vmem());
    end
  end

  // ---------------- drift compensation ----------------
  logic [TSW-1:0] cal_total;
  always_comb begin
    cal_total = '0;
    for (int s = 0; s < NSA; s++) cal_total += TSW'(sa_csum[s]);
  end

  gdc_unit #(.SUM_W(TSW), .GF(8), .GAIN_W(10)) u_gdc (
    .clk, .rst_n, .cal_valid(state == S_CAL_SUM), .cal_ref,
    .cal_sum(cal_total), .gain, .busy(gdc_busy));

  // ---------------- buffers ----------------
  always_ff @(posedge clk) begin
    if (inb_we) inb[inb_t][inb_word] <= inb_data;
    if (v1) begin
      for (int b = 0; b < RB; b++)
        for (int k = 0; k < NRD; k++)
          outb[t1[$clog2(TMAX)-1:0]][b][int'(m1) * NRD + k] <= spk[b][k];
    end
  end
  assign outb_data = outb[outb_t][outb_rb];

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      m_q      <= '0;
      t_q      <= '0;
      tsteps_q <= '0;
      v1       <= 1'b0;
      first1   <= 1'b0;
      m1       <= '0;
      t1       <= '0;
      done     <= 1'b0;
    end else begin
      done   <= 1'b0;
      v1     <= (state == S_RUN);
      first1 <= (state == S_RUN) && (t_q == 0);
      m1     <= m_q;
      t1     <= t_q;
      unique case (state)
        S_IDLE: begin
          m_q <= '0;
          t_q <= '0;
          if (start) begin
            tsteps_q <= t_steps;
            state    <= S_RUN;
          end else if (cal_start) begin
            state <= S_CAL_RD;
          end
        end
        S_RUN: begin
          if (t_q == tsteps_q - 1'b1) begin
            t_q <= '0;
            if (m_q == ($clog2(SHARE))'(SHARE - 1)) state <= S_DRAIN;
            else m_q <= m_q + 1'b1;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_DRAIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_CAL_RD:  state <= S_CAL_SUM;
        S_CAL_SUM: state <= S_CAL_WAIT;
        S_CAL_WAIT: if (!gdc_busy) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  // a token must have at least one and at most TMAX time steps
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state == S_IDLE) |-> (t_steps != 0 && t_steps <= TMAX));
endmodule
