// AIMC engine: NT spiking neuron tiles.  A command names a virtual block,
// tiles tile_first .. tile_first+tile_num-1, that together store one layer
// (row-block-wise mapping: each tile holds RB*COLS output rows for the same
// CB*ROWS inputs).  Layers run token by token, as the paper's token-wise
// event-driven dataflow prescribes:
//   for each token n: LOAD  the token's T input vectors (in_words words each,
//                           the rest of the input buffer zero) from
//                           src_base + (t*n_tok + n)*src_wpv into every tile
//                     RUN   all tiles of the block (SHARE*T + 2 cycles)
//                     STORE their output spikes, RB words per tile and time
//                           step, to dst_base + (t*n_tok + n)*dst_wpv + j*RB + rb
// OP_CAL runs one drift calibration on every tile of the block.
// Weights and thresholds are written straight into a tile (prog_*, thr_*).
// SRAM port: one request per cycle, read data one cycle later.
// The tiles and the token-wise order are the paper's; virtual-block
// addressing, the memory layout and the absence of overlap between the load,
// run and store of consecutive tokens are this design's choices.
module aimc_engine
  import xp_pkg::*;
#(
  parameter int NT    = 2,
  parameter int RB    = 2,
  parameter int CB    = 4,
  parameter int TMAX  = 16,
  parameter int V_W   = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  cmd_t                         cmd,
  output logic                         busy,
  output logic                         done,
  output sram_req_t                    mem_req,
  input  logic [WORD_W-1:0]            mem_rdata,
  // programming
  input  logic                         prog_en,
  input  logic [3:0]                   prog_tile,
  input  logic [$clog2(RB*CB)-1:0]     prog_sa,
  input  logic [$clog2(XBAR_ROWS)-1:0] prog_row,
  input  logic [$clog2(XBAR_COLS)-1:0] prog_col,
  input  logic signed [W_BITS-1:0]     prog_w,
  input  logic                         thr_we,
  input  logic [3:0]                   thr_tile,
  input  logic signed [V_W-1:0]        thr_in,
  input  logic [8:0]                   drift_q8,
  output logic [NT-1:0][9:0]           gain
);
  localparam int TW  = $clog2(TMAX + 1);
  localparam int TI  = $clog2(TMAX);
  localparam int CBW = (CB > 1) ? $clog2(CB) : 1;
  localparam int RBW = (RB > 1) ? $clog2(RB) : 1;

  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_LOAD_TAIL, S_RUN, S_WAIT, S_STORE, S_CAL, S_CAL_WAIT,
                            S_DONE} state_e;
  state_e state;
  cmd_t   c;

  logic [7:0]      n_q;
  logic [TW-1:0]   t_q, r_t;
  logic [CBW-1:0]  w_q, r_w;
  logic [3:0]      j_q;
  logic [RBW-1:0]  b_q;
  logic            r_valid, r_zero;

  logic [NT-1:0]   in_blk, t_busy, t_done;
  logic [NT-1:0][WORD_W-1:0] t_outb;

  always_comb
    for (int i = 0; i < NT; i++)
      in_blk[i] = (i >= int'(c.tile_first)) && (i < int'(c.tile_first) + int'(c.tile_num));

  // ---------------- tiles ----------------
  for (genvar i = 0; i < NT; i++) begin : g_tile
    spiking_neuron_tile #(.RB(RB), .CB(CB), .TMAX(TMAX), .V_W(V_W)) u_tile (
      .clk, .rst_n,
      .prog_en(prog_en && (prog_tile == 4'(i))), .prog_sa, .prog_row, .prog_col, .prog_w,
      .thr_we(thr_we && (thr_tile == 4'(i))), .thr_in, .drift_q8,
      .inb_we(r_valid), .inb_t(r_t[TI-1:0]), .inb_word(r_w),
      .inb_data(r_zero ? '0 : mem_rdata),
      .start(state == S_RUN && in_blk[i]), .t_steps(c.t_steps[TW-1:0]),
      .cal_start(state == S_CAL && in_blk[i]), .cal_ref(c.cal_ref),
      .busy(t_busy[i]), .done(t_done[i]),
      .outb_t(t_q[TI-1:0]), .outb_rb(b_q), .outb_data(t_outb[i]), .gain(gain[i]));
  end

  // ---------------- memory requests ----------------
  logic [ADDR_W-1:0] vec_src, vec_dst;
  assign vec_src = c.src_base + ADDR_W'((int'(t_q) * int'(c.n_tok) + int'(n_q)) * int'(c.src_wpv));
  assign vec_dst = c.dst_base + ADDR_W'((int'(t_q) * int'(c.n_tok) + int'(n_q)) * int'(c.dst_wpv));

  always_comb begin
    mem_req = '0;
    if (state == S_LOAD && (int'(w_q) < int'(c.in_words))) begin
      mem_req.en   = 1'b1;
      mem_req.addr = vec_src + ADDR_W'(w_q);
    end else if (state == S_STORE) begin
      mem_req.en    = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = vec_dst + ADDR_W'(int'(j_q) * RB + int'(b_q));
      mem_req.wdata = t_outb[int'(c.tile_first) + int'(j_q)];
      mem_req.wmask = '1;
    end
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      n_q <= '0; t_q <= '0; w_q <= '0; j_q <= '0; b_q <= '0;
      r_t <= '0; r_w <= '0; r_valid <= 1'b0; r_zero <= 1'b0;
      done <= 1'b0;
    end else begin
      done    <= 1'b0;
      r_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c   <= cmd;
          n_q <= '0; t_q <= '0; w_q <= '0;
          state <= (cmd.op == OP_CAL) ? S_CAL : S_LOAD;
        end
        S_LOAD: begin
          r_valid <= 1'b1;
          r_zero  <= !(int'(w_q) < int'(c.in_words));
          r_t <= t_q;
          r_w <= w_q;
          if (int'(w_q) != CB - 1) w_q <= w_q + 1'b1;
          else begin
            w_q <= '0;
            if (t_q != TW'(c.t_steps) - 1'b1) t_q <= t_q + 1'b1;
            else state <= S_LOAD_TAIL;
          end
        end
        S_LOAD_TAIL: state <= S_RUN;
        S_RUN:  state <= S_WAIT;
        S_WAIT: if (t_done[c.tile_first]) begin
          t_q <= '0; j_q <= '0; b_q <= '0;
          state <= S_STORE;
        end
        S_STORE: begin
          if (int'(b_q) != RB - 1) b_q <= b_q + 1'b1;
          else begin
            b_q <= '0;
            if (j_q != c.tile_num - 1'b1) j_q <= j_q + 1'b1;
            else begin
              j_q <= '0;
              if (t_q != TW'(c.t_steps) - 1'b1) t_q <= t_q + 1'b1;
              else begin
                t_q <= '0;
                if (n_q != c.n_tok - 1'b1) begin
                  n_q   <= n_q + 1'b1;
                  state <= S_LOAD;
                end else state <= S_DONE;
              end
            end
          end
        end
        S_CAL:      state <= S_CAL_WAIT;   // one-cycle start pulse to the tiles
        S_CAL_WAIT: if (t_done[c.tile_first]) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |-> (cmd.tile_num != 0 &&
        int'(cmd.tile_first) + int'(cmd.tile_num) <= NT &&
        (cmd.op == OP_CAL || cmd.n_tok != 0)));
endmodule
