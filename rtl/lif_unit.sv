// Leaky integrate-and-fire unit shared by the SAs of one row block.
// Each valid cycle (one time step of one output neuron) it
//   1. merges the NIN local sums with a carry-save adder into a pre-activation,
//   2. scales it by the drift-compensation gain: I = (sum * gain) >>> GF,
//   3. forms V = (V_prev >>> 1) + I, the right shift being the leak beta = 0.5
//      (V_prev is taken as 0 on the first time step of a neuron, clear=1),
//   4. fires when V >= threshold, and then stores 0, else stores V.
// The membrane potential saturates at the V_W signed range.  spike is
// combinational in the valid cycle; the potential register updates on the
// clock edge.  The threshold register is loaded with thr_we.
// Steps 1, 3 and 4 and beta=0.5 follow the paper; widths, saturation and the
// place of the gain are this design's choices.
module lif_unit #(
  parameter int NIN  = 4,
  parameter int IN_W = xp_pkg::LS_W,
  parameter int V_W  = 12,
  parameter int GF   = 8,
  parameter int GAIN_W = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          thr_we,
  input  logic signed [V_W-1:0]         thr_in,
  input  logic [GAIN_W-1:0]             gain,
  input  logic                          valid,
  input  logic                          clear,
  input  logic signed [NIN-1:0][IN_W-1:0] local_sum,
  output logic                          spike,
  output logic signed [V_W-1:0]         vmem
);
  localparam int SW = IN_W + $clog2(NIN) + 1;
  localparam int PW = SW + GAIN_W + 1;
  localparam int VMAX = (1 << (V_W - 1)) - 1;
  localparam int VMIN = -(1 << (V_W - 1));

  logic signed [SW-1:0]  pre;
  logic signed [PW-1:0]  scaled;
  logic signed [V_W-1:0] thr;
  logic signed [PW+1:0]  vsum;
  logic signed [V_W-1:0] vnew;

  csa_adder #(.NIN(NIN), .IN_W(IN_W), .OW(SW)) u_csa (.in(local_sum), .sum(pre));

  assign scaled = (PW'(pre) * signed'({1'b0, gain})) >>> GF;

  always_comb begin
    vsum = (clear ? '0 : (PW+2)'(vmem >>> 1)) + (PW+2)'(scaled);
    if (vsum > VMAX)      vnew = V_W'(VMAX);
    else if (vsum < VMIN) vnew = V_W'(VMIN);
    else                  vnew = V_W'(vsum);
    spike = valid && (vnew >= thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem <= '0;
      thr  <= V_W'(VMAX);
    end else begin
      if (thr_we) thr <= thr_in;
      if (valid)  vmem <= spike ? '0 : vnew;
    end
  end
endmodule
