// System controller.  Accepts one command at a time (cmd_valid/cmd_ready
// handshake: taken in a cycle where both are high), starts the engine it
// names (OP_AIMC and OP_CAL: AIMC engine, OP_SSA: SSA engine), waits for its
// done pulse and pulses done itself.  Only one engine runs at a time, so the
// inference alternates between the engines as in the paper's dataflow, and
// the single SRAM port is given to the running engine; while idle it belongs
// to the host (host_gnt), which is how model inputs, residual connections and
// inference outputs move in and out.  Counters report how many commands of
// each kind completed.
// The paper names the controller only; everything here is this design's
// choice.
module controller
  import xp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  output logic              cmd_ready,
  output logic              busy,
  output logic              done,
  // engines
  output logic              aimc_start,
  output logic              ssa_start,
  output cmd_t              eng_cmd,
  input  logic              aimc_done,
  input  logic              ssa_done,
  // SRAM arbitration
  input  sram_req_t         host_req,
  input  sram_req_t         aimc_req,
  input  sram_req_t         ssa_req,
  output sram_req_t         mem_req,
  output logic              host_gnt,
  // statistics
  output logic [15:0]       n_aimc,
  output logic [15:0]       n_ssa,
  output logic [15:0]       n_cal
);
  typedef enum logic [1:0] {C_IDLE, C_AIMC, C_SSA} state_e;
  state_e state;

  assign cmd_ready  = (state == C_IDLE);
  assign busy       = (state != C_IDLE);
  assign host_gnt   = (state == C_IDLE);
  assign aimc_start = cmd_valid && cmd_ready && (cmd.op != OP_SSA);
  assign ssa_start  = cmd_valid && cmd_ready && (cmd.op == OP_SSA);
  assign eng_cmd    = cmd;

  always_comb begin
    unique case (state)
      C_AIMC:  mem_req = aimc_req;
      C_SSA:   mem_req = ssa_req;
      default: mem_req = host_req;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      done   <= 1'b0;
      n_aimc <= '0;
      n_ssa  <= '0;
      n_cal  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: begin
          if (aimc_start) begin
            state <= C_AIMC;
            if (cmd.op == OP_CAL) n_cal <= n_cal + 1'b1;
            else                  n_aimc <= n_aimc + 1'b1;
          end else if (ssa_start) begin
            state <= C_SSA;
            n_ssa <= n_ssa + 1'b1;
          end
        end
        C_AIMC: if (aimc_done) begin state <= C_IDLE; done <= 1'b1; end
        C_SSA:  if (ssa_done)  begin state <= C_IDLE; done <= 1'b1; end
        default: state <= C_IDLE;
      endcase
    end
  end

  // the engines never run together; the host only touches SRAM while idle
  assert property (@(posedge clk) disable iff (!rst_n) !(aimc_req.en && ssa_req.en));
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !host_req.en);
endmodule
