// Stochastic attention cell SAC(i,j) of an SSA tile.
// Query bit q (token i) arrives on the column bus, key bit k and value bit v
// (token j) on the row buses, one feature d per clock.
//  - An AND gate and a UINT8 counter accumulate sum_d Q[d,i] & K[d,j] over
//    the d_K cycles of a time step.
//  - On the last cycle (last=1) the total goes to the register; the Bernoulli
//    encoder compares it with a PRN that is held for the next d_K cycles, so
//    S(i,j) ~ Bern(count/d_K) is a constant bit during the next time step.
//    mask forces S to 0 (causal mask of a decoder).
//  - A d_K-bit shift register delays v by one time step, so V^t meets S^t;
//    the output is S & V_delayed.
// Timing: the inputs of time step t are sampled in cycles t*DK..t*DK+DK-1
// (en=1); out carries S^t & V^t[d,j] in cycle (t+1)*DK + d.
// Structure from the paper; the held PRN is this design's choice.
module sac #(
  parameter int DK    = 64,
  parameter int CNT_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   first,
  input  logic                   last,
  input  logic                   q,
  input  logic                   k,
  input  logic                   v,
  input  logic                   mask,
  input  logic [$clog2(DK)-1:0]  prn,
  output logic                   out
);
  logic [CNT_W-1:0] cnt, cnt_nxt, sreg;
  logic [DK-1:0]    vsr;
  logic             s;

  assign cnt_nxt = (first ? '0 : cnt) + CNT_W'(q & k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      sreg <= '0;
      vsr  <= '0;
    end else if (en) begin
      cnt <= cnt_nxt;
      if (last) sreg <= cnt_nxt;
      vsr <= {vsr[DK-2:0], v};
    end
  end

  bernoulli_encoder #(.VAL_W(CNT_W), .PRN_W($clog2(DK))) u_enc (.value(sreg), .prn, .spike(s));

  assign out = s & ~mask & vsr[DK-1];
endmodule
