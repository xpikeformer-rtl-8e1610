// Shared constants and types of the hybrid analog-digital spiking-transformer
// accelerator.  The synaptic-array numbers (128x128 differential cells, 4-bit
// conductance, 5-bit weights and ADC codes, ADC sharing ratio 8) follow the
// paper's configuration table.  The SRAM word width, the command format and
// all field widths are this design's own choices.
package xp_pkg;

  // ---- synaptic array (Table of SA configuration) ----
  localparam int XBAR_ROWS = 128;                    // cells per column
  localparam int XBAR_COLS = 128;                    // cells per row
  localparam int G_W       = 4;                      // conductance bits per device
  localparam int W_BITS    = 5;                      // signed weight bits
  localparam int ADC_BITS  = 5;                      // ADC resolution
  localparam int ADC_SHARE = 8;                      // columns per readout unit
  localparam int NREAD     = XBAR_COLS / ADC_SHARE;  // readout units per SA (16)
  localparam int I_W       = $clog2(XBAR_ROWS * ((1 << G_W) - 1) + 1); // current width
  localparam int LS_W      = ADC_BITS + 1;           // signed local sum (G+ - G- codes)

  // ---- on-chip SRAM ----
  localparam int WORD_W = 128;                       // one spike sub-vector per word
  localparam int ADDR_W = 16;

  typedef struct packed {
    logic              en;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] wdata;
    logic [WORD_W-1:0] wmask;   // bit write enables
  } sram_req_t;

  // ---- commands accepted by the controller ----
  typedef enum logic [1:0] {
    OP_AIMC = 2'd0,   // one feed-forward / fully connected layer on the AIMC engine
    OP_SSA  = 2'd1,   // attention heads on the SSA engine
    OP_CAL  = 2'd2    // global drift compensation calibration of a virtual block
  } op_e;

  typedef struct packed {
    op_e              op;
    logic [ADDR_W-1:0] src_base;    // word address of the input tensor
    logic [3:0]        src_wpv;     // words per token vector in the input tensor
    logic [ADDR_W-1:0] dst_base;    // word address of the output tensor
    logic [3:0]        dst_wpv;     // words per token vector in the output tensor
    logic [7:0]        n_tok;       // tokens N (1..)
    logic [4:0]        t_steps;     // spike encoding length T (1..)
    // AIMC / CAL
    logic [2:0]        in_words;    // input words used per token (1..4)
    logic [3:0]        tile_first;  // first spiking neuron tile of the virtual block
    logic [3:0]        tile_num;    // tiles in the virtual block
    logic              cal_ref;     // CAL: store reference instead of updating gain
    // SSA
    logic [3:0]        head_base;   // head handled by SSA tile 0
    logic [3:0]        dmodel_words;// words of one of Q, K, V per token (Q|K|V layout)
    logic              causal;      // apply the causal (decoder) mask
  } cmd_t;

  // Bernoulli encoder: spike = (value > prn), prn uniform in [0, I_max).
  function automatic logic bern(input logic [15:0] value, input logic [15:0] prn);
    return value > prn;
  endfunction

endpackage
