// SSA engine: NH SSA tiles, one attention head each, and the LFSR arrays
// that feed all their Bernoulli encoders.  One OP_SSA command runs heads
// head_base .. head_base+NH-1 of one layer over T time steps:
//  1. LOAD   (split heads) for every time step t, token n < n_tok, tile h and
//            matrix Q, K, V, read the token's word holding that head's d_K
//            features and keep the slice in the tile's buffer.  Token vectors
//            are laid out Q|K|V, each dmodel_words words, at
//            src_base + (t*n_tok + n)*src_wpv.
//  2. STREAM all tiles stream Q^t, K^t, V^t feature by feature, T steps back
//            to back plus one flush step, and collect A^t as it appears.
//  3. STORE  (merge heads) write each token's d_K attention bits into its
//            head's place at dst_base + (t*n_tok + n)*dst_wpv with a bit mask.
// Tokens n >= n_tok feed zeros, so a tile of N can hold shorter sequences.
// first_latency reports the cycles from the first streamed input to the
// first valid attention output of the last command (DK+1 here).
// SRAM port: one request per cycle, read data one cycle later.
// The tiles, the LFSR array and the head-wise parallelism are the paper's; the
// buffers, the memory layout and the load/stream/store order are this
// design's choices.
module ssa_engine
  import xp_pkg::*;
#(
  parameter int NH    = 2,
  parameter int N     = 64,
  parameter int DK    = 64,
  parameter int TMAX  = 16,
  parameter int CNT_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cmd_t              cmd,
  output logic              busy,
  output logic              done,
  output sram_req_t         mem_req,
  input  logic [WORD_W-1:0] mem_rdata,
  output logic [15:0]       first_latency
);
  localparam int DW = $clog2(DK);
  localparam int NW = $clog2(N);
  localparam int TW = $clog2(TMAX + 1);
  localparam int HW = (NH > 1) ? $clog2(NH) : 1;
  localparam int SAC_LFSR = (NH * N * N + 3) / 4;
  localparam int COL_LFSR = (NH * N + 3) / 4;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LOAD_TAIL, S_STREAM, S_STORE, S_DONE} state_e;
  state_e state;
  cmd_t   c;

  logic [DK-1:0] qbuf [NH][TMAX][N];
  logic [DK-1:0] kbuf [NH][TMAX][N];
  logic [DK-1:0] vbuf [NH][TMAX][N];
  logic [DK-1:0] abuf [NH][TMAX][N];

  // ---------------- random numbers ----------------
  logic                       sac_step;
  logic [4*SAC_LFSR-1:0][7:0] sac_bytes;
  logic [4*COL_LFSR-1:0][7:0] col_bytes;
  lfsr_array #(.NUM(SAC_LFSR), .SEED_BASE(32'hA5A5_0001)) u_lfsr_sac (
    .clk, .rst_n, .en(sac_step), .prn(sac_bytes));
  lfsr_array #(.NUM(COL_LFSR), .SEED_BASE(32'h5A5A_0002)) u_lfsr_col (
    .clk, .rst_n, .en(state == S_STREAM), .prn(col_bytes));

  // ---------------- tiles ----------------
  logic [TW-1:0] ts;             // streamed time step
  logic [DW-1:0] ds;             // streamed feature
  logic          sync;
  logic [NH-1:0][N-1:0] a_out;
  logic [NH-1:0]        a_valid, t_step;

  for (genvar h = 0; h < NH; h++) begin : g_tile
    logic [N-1:0] qc, kr, vr;
    logic [N*N-1:0][DW-1:0] sp;
    logic [N-1:0][NW-1:0]   cp;
    for (genvar n = 0; n < N; n++) begin : g_in
      logic live;
      assign live  = (ts < TW'(c.t_steps)) && (n < int'(c.n_tok));
      assign qc[n] = live && qbuf[h][ts[$clog2(TMAX)-1:0]][n][ds];
      assign kr[n] = live && kbuf[h][ts[$clog2(TMAX)-1:0]][n][ds];
      assign vr[n] = live && vbuf[h][ts[$clog2(TMAX)-1:0]][n][ds];
      assign cp[n] = col_bytes[h*N + n][NW-1:0];
    end
    for (genvar x = 0; x < N*N; x++) begin : g_sp
      assign sp[x] = sac_bytes[h*N*N + x][DW-1:0];
    end
    ssa_tile #(.N(N), .DK(DK), .CNT_W(CNT_W)) u_tile (
      .clk, .rst_n, .en(state == S_STREAM), .sync, .causal(c.causal),
      .q_col(qc), .k_row(kr), .v_row(vr), .sac_prn(sp), .col_prn(cp),
      .step(t_step[h]), .a_out(a_out[h]), .a_valid(a_valid[h]));
  end
  assign sac_step = t_step[0];

  // ---------------- sequencing ----------------
  logic [1:0]        l_mat, r_mat;
  logic [HW-1:0]     l_h, r_h;
  logic [7:0]        l_n, r_n;
  logic [TW-1:0]     l_t, r_t;
  logic [ADDR_W-1:0] vec_addr;
  logic              r_valid;
  logic [TW-1:0]     to;
  logic [DW-1:0]     dout;
  logic [15:0]       cyc;
  logic              got_first;

  function automatic logic [ADDR_W-1:0] head_word(input cmd_t cc, input int h);
    return ADDR_W'(((int'(cc.head_base) + h) * DK) / WORD_W);
  endfunction
  function automatic int head_bit(input cmd_t cc, input int h);
    return ((int'(cc.head_base) + h) * DK) % WORD_W;
  endfunction

  assign sync = (state == S_STREAM) && (ts == '0) && (ds == '0);

  always_comb begin
    mem_req = '0;
    if (state == S_LOAD) begin
      mem_req.en   = 1'b1;
      mem_req.addr = vec_addr + ADDR_W'(l_mat) * ADDR_W'(c.dmodel_words) + head_word(c, int'(l_h));
    end else if (state == S_STORE) begin
      mem_req.en    = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = vec_addr + head_word(c, int'(l_h));
      mem_req.wdata = WORD_W'(abuf[l_h][l_t[$clog2(TMAX)-1:0]][l_n]) << head_bit(c, int'(l_h));
      mem_req.wmask = WORD_W'({DK{1'b1}}) << head_bit(c, int'(l_h));
    end
  end

  // capture of read data (one cycle after the request)
  always_ff @(posedge clk) begin
    if (r_valid) begin
      logic [DK-1:0] sl;
      sl = DK'(mem_rdata >> head_bit(c, int'(r_h)));
      unique case (r_mat)
        2'd0:    qbuf[r_h][r_t[$clog2(TMAX)-1:0]][r_n] <= sl;
        2'd1:    kbuf[r_h][r_t[$clog2(TMAX)-1:0]][r_n] <= sl;
        default: vbuf[r_h][r_t[$clog2(TMAX)-1:0]][r_n] <= sl;
      endcase
    end
    if (state == S_STREAM) begin
      for (int h = 0; h < NH; h++)
        if (a_valid[h])
          for (int n = 0; n < N; n++)
            abuf[h][to[$clog2(TMAX)-1:0]][n][dout] <= a_out[h][n];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      l_mat <= '0; l_h <= '0; l_n <= '0; l_t <= '0;
      r_mat <= '0; r_h <= '0; r_n <= '0; r_t <= '0;
      r_valid  <= 1'b0;
      vec_addr <= '0;
      ts <= '0; ds <= '0; to <= '0; dout <= '0;
      cyc <= '0; got_first <= 1'b0;
      first_latency <= '0;
      done <= 1'b0;
    end else begin
      done    <= 1'b0;
      r_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c        <= cmd;
          vec_addr <= cmd.src_base;
          l_mat <= '0; l_h <= '0; l_n <= '0; l_t <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          r_valid <= 1'b1;
          r_mat <= l_mat; r_h <= l_h; r_n <= l_n; r_t <= l_t;
          if (l_mat != 2'd2) l_mat <= l_mat + 1'b1;
          else begin
            l_mat <= '0;
            if (int'(l_h) != NH - 1) l_h <= l_h + 1'b1;
            else begin
              l_h <= '0;
              vec_addr <= vec_addr + ADDR_W'(c.src_wpv);
              if (l_n != c.n_tok - 1'b1) l_n <= l_n + 1'b1;
              else begin
                l_n <= '0;
                if (l_t != TW'(c.t_steps) - 1'b1) l_t <= l_t + 1'b1;
                else state <= S_LOAD_TAIL;
              end
            end
          end
        end
        S_LOAD_TAIL: begin
          ts <= '0; ds <= '0; to <= '0; dout <= '0;
          cyc <= '0; got_first <= 1'b0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          cyc <= cyc + 1'b1;
          ds  <= ds + 1'b1;
          if (ds == DW'(DK - 1) && ts != TW'(c.t_steps)) ts <= ts + 1'b1;
          if (a_valid[0]) begin
            if (!got_first) begin
              got_first     <= 1'b1;
              first_latency <= cyc;
            end
            dout <= dout + 1'b1;
            if (dout == DW'(DK - 1)) begin
              if (to == TW'(c.t_steps) - 1'b1) begin
                state    <= S_STORE;
                vec_addr <= c.dst_base;
                l_h <= '0; l_n <= '0; l_t <= '0;
              end else to <= to + 1'b1;
            end
          end
        end
        S_STORE: begin
          if (int'(l_h) != NH - 1) l_h <= l_h + 1'b1;
          else begin
            l_h <= '0;
            vec_addr <= vec_addr + ADDR_W'(c.dst_wpv);
            if (l_n != c.n_tok - 1'b1) l_n <= l_n + 1'b1;
            else begin
              l_n <= '0;
              if (l_t != TW'(c.t_steps) - 1'b1) l_t <= l_t + 1'b1;
              else state <= S_DONE;
            end
          end
        end
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
    (start && state == S_IDLE) |-> (cmd.n_tok != 0 && int'(cmd.n_tok) <= N &&
                                    cmd.t_steps != 0 && int'(cmd.t_steps) <= TMAX));
endmodule
