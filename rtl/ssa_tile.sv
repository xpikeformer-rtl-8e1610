// N x N stochastic spiking attention (SSA) tile: one attention head.
// Per time step t the tile receives Q^t, K^t and V^t (d_K x N binary) one
// feature row per clock over d_K cycles: q_col[i] = Q^t[d,i] runs down SAC
// column i, k_row[j] = K^t[d,j] and v_row[j] = V^t[d,j] run along SAC row j.
// SAC(i,j) forms S^t(i,j) ~ Bern((1/d_K) sum_d Q[d,i] K[d,j]) and, during the
// next d_K cycles, S^t(i,j) & V^t[d,j].  The N-input binary adder of column i
// sums these over j and the column Bernoulli encoder (I_max = N) emits
//   A^t[d,i] ~ Bern((1/N) sum_j S^t(i,j) V^t[d,j]).
// So the tile outputs A^t one feature row per clock (a_out[i] = A^t[d,i]),
// one time step behind its input, and streams continuously over time steps.
//
// Timing: sync marks the first input cycle (d=0 of t=0).  With en held high
// the row A^t[d,:] appears on a_out, a_valid=1, in cycle (t+1)*DK + d + 1
// counted from the sync cycle, i.e. DK+1 cycles from first input to first
// output.  After the last step one more step of zero input flushes V.
// PRNs come from outside: sac_prn (held for a step; step pulses when they
// must advance) and col_prn (fresh every cycle).  causal masks S(i,j), j > i.
// The array, buses, adders and encoders follow the paper; the output
// register and the flush step are this design's choices.
module ssa_tile #(
  parameter int N     = 64,
  parameter int DK    = 64,
  parameter int CNT_W = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic                         sync,
  input  logic                         causal,
  input  logic [N-1:0]                 q_col,
  input  logic [N-1:0]                 k_row,
  input  logic [N-1:0]                 v_row,
  input  logic [N*N-1:0][$clog2(DK)-1:0] sac_prn,
  input  logic [N-1:0][$clog2(N)-1:0]  col_prn,
  output logic                         step,
  output logic [N-1:0]                 a_out,
  output logic                         a_valid
);
  localparam int DW = $clog2(DK);
  localparam int SW = $clog2(N) + 1;

  logic [DW-1:0] d_q, d_cur;
  logic          primed, primed_cur;
  logic          first, last;

  assign d_cur      = sync ? '0 : d_q;
  assign primed_cur = sync ? 1'b0 : primed;
  assign first      = (d_cur == '0);
  assign last       = (d_cur == DW'(DK - 1));
  assign step       = en && last;

  logic [N-1:0][N-1:0] sac_out;   // [i][j]

  for (genvar i = 0; i < N; i++) begin : g_col
    for (genvar j = 0; j < N; j++) begin : g_row
      sac #(.DK(DK), .CNT_W(CNT_W)) u_sac (
        .clk, .rst_n, .en, .first, .last,
        .q(q_col[i]), .k(k_row[j]), .v(v_row[j]),
        .mask(causal && (j > i)),
        .prn(sac_prn[i*N + j]),
        .out(sac_out[i][j]));
    end
  end

  logic [N-1:0][SW-1:0] col_sum;
  logic [N-1:0]         a_nxt;
  for (genvar i = 0; i < N; i++) begin : g_add
    always_comb begin
      col_sum[i] = '0;
      for (int j = 0; j < N; j++) col_sum[i] += SW'(sac_out[i][j]);
    end
    bernoulli_encoder #(.VAL_W(SW), .PRN_W($clog2(N))) u_enc (
      .value(col_sum[i]), .prn(col_prn[i]), .spike(a_nxt[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q     <= '0;
      primed  <= 1'b0;
      a_out   <= '0;
      a_valid <= 1'b0;
    end else begin
      a_valid <= en && primed_cur;
      if (en) begin
        d_q   <= d_cur + 1'b1;
        a_out <= a_nxt;
        if (last) primed <= 1'b1;
        else      primed <= primed_cur;
      end
    end
  end
endmodule
