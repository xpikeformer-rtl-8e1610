// Top level of the hybrid analog-digital spiking-transformer accelerator.
// It joins the AIMC engine (spiking neuron tiles with PCM synaptic arrays and
// LIF units: embedding, feed-forward and Q/K/V projection layers), the SSA
// engine (stochastic spiking attention tiles and their LFSR array), the
// shared on-chip SRAM and the controller, as in the paper's system figure.
// The host issues commands (xp_pkg::cmd_t) one by one; a transformer layer is
// the sequence  AIMC (QKV projection) -> SSA (heads) -> AIMC (feed-forward)
// ...  with the two engines taking turns on the SRAM.  Off-chip memory and the
// residual units are outside this design: their traffic uses the host SRAM
// port (granted while no command runs) and the weight programming port.
// pcm_drift_q8 drives the global conductance drift of the PCM behavioural
// model (256 = no drift); it is not a pin of a real chip.
// ssa_first_latency is the first-input-to-first-output delay of the last
// attention command, n_* count completed commands.
// Engine and tile counts, SRAM size and sequence length limits are this
// design's choices; the paper fixes only the synaptic-array configuration.
module xpikeformer_top
  import xp_pkg::*;
#(
  parameter int NT         = 2,      // spiking neuron tiles
  parameter int RB         = 2,      // row blocks per tile
  parameter int CB         = 4,      // synaptic arrays per row block
  parameter int NH         = 2,      // SSA tiles
  parameter int N          = 64,     // tokens per SSA tile
  parameter int DK         = 64,     // head dimension
  parameter int TMAX       = 16,     // longest spike encoding
  parameter int SRAM_DEPTH = 16384,
  parameter int V_W        = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // commands
  input  logic                          cmd_valid,
  input  cmd_t                          cmd,
  output logic                          cmd_ready,
  output logic                          busy,
  output logic                          done,
  // host SRAM port
  input  sram_req_t                     host_req,
  output logic [WORD_W-1:0]             host_rdata,
  output logic                          host_gnt,
  // weight / threshold programming
  input  logic                          prog_en,
  input  logic [3:0]                    prog_tile,
  input  logic [$clog2(RB*CB)-1:0]      prog_sa,
  input  logic [$clog2(XBAR_ROWS)-1:0]  prog_row,
  input  logic [$clog2(XBAR_COLS)-1:0]  prog_col,
  input  logic signed [W_BITS-1:0]      prog_w,
  input  logic                          thr_we,
  input  logic [3:0]                    thr_tile,
  input  logic signed [V_W-1:0]         thr_in,
  input  logic [8:0]                    pcm_drift_q8,
  // status
  output logic [NT-1:0][9:0]            gdc_gain,
  output logic [15:0]                   ssa_first_latency,
  output logic [15:0]                   n_aimc,
  output logic [15:0]                   n_ssa,
  output logic [15:0]                   n_cal
);
  sram_req_t         aimc_req, ssa_req, mem_req;
  logic [WORD_W-1:0] mem_rdata;
  logic              aimc_start, ssa_start, aimc_done, ssa_done;
  cmd_t              eng_cmd;

  controller u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .busy, .done,
    .aimc_start, .ssa_start, .eng_cmd, .aimc_done, .ssa_done,
    .host_req, .aimc_req, .ssa_req, .mem_req, .host_gnt,
    .n_aimc, .n_ssa, .n_cal);

  spike_sram #(.DEPTH(SRAM_DEPTH)) u_sram (.clk, .req(mem_req), .rdata(mem_rdata));
  assign host_rdata = mem_rdata;

  aimc_engine #(.NT(NT), .RB(RB), .CB(CB), .TMAX(TMAX), .V_W(V_W)) u_aimc (
    .clk, .rst_n, .start(aimc_start), .cmd(eng_cmd), .busy(), .done(aimc_done),
    .mem_req(aimc_req), .mem_rdata,
    .prog_en, .prog_tile, .prog_sa, .prog_row, .prog_col, .prog_w,
    .thr_we, .thr_tile, .thr_in, .drift_q8(pcm_drift_q8), .gain(gdc_gain));

  ssa_engine #(.NH(NH), .N(N), .DK(DK), .TMAX(TMAX)) u_ssa (
    .clk, .rst_n, .start(ssa_start), .cmd(eng_cmd), .busy(), .done(ssa_done),
    .mem_req(ssa_req), .mem_rdata, .first_latency(ssa_first_latency));
endmodule
