// Global drift compensation (GDC) of one spiking neuron tile.
// A calibration read applies a fixed input pattern to the tile's SAs and sums
// the ADC codes of the columns read in MUX cycle 0 (cal_sum, one pulse of
// cal_valid).  Right after programming the sum is stored as the reference
// (cal_ref=1) and the gain set to 1.0.  A later calibration (cal_ref=0)
// starts a restoring serial divider that computes
//   gain = min(2^GAIN_W - 1, (ref << GF) / cal_sum)
// in GF fractional bits; the LIF units multiply their pre-activations by it.
// The division takes SUM_W+GF+1 cycles; busy is high meanwhile and the old
// gain stays in use until the new one is written.
// The paper gives only the method (scale the outputs by a factor derived from
// calibration measurements of several columns); the calibration pattern, the
// fixed-point format and the divider are this design's choices.
module gdc_unit #(
  parameter int SUM_W  = 14,
  parameter int GF     = 8,
  parameter int GAIN_W = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cal_valid,
  input  logic              cal_ref,
  input  logic [SUM_W-1:0]  cal_sum,
  output logic [GAIN_W-1:0] gain,
  output logic              busy
);
  localparam int NW = SUM_W + GF;           // dividend width
  localparam int GMAX = (1 << GAIN_W) - 1;

  logic [SUM_W-1:0]        ref_sum, divisor;
  logic [NW-1:0]           quot;
  logic [SUM_W:0]          rem;
  logic [NW-1:0]           dividend;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [SUM_W:0]          trial;

  assign trial = {rem[SUM_W-1:0], dividend[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_sum  <= '0;
      divisor  <= '0;
      quot     <= '0;
      rem      <= '0;
      dividend <= '0;
      cnt      <= '0;
      busy     <= 1'b0;
      gain     <= GAIN_W'(1 << GF);
    end else if (busy) begin
      if (cnt == 0) begin
        busy <= 1'b0;
        gain <= (quot > NW'(GMAX)) ? GAIN_W'(GMAX) : quot[GAIN_W-1:0];
      end else begin
        // one restoring-division step
        if (trial >= {1'b0, divisor}) begin
          rem  <= trial - {1'b0, divisor};
          quot <= {quot[NW-2:0], 1'b1};
        end else begin
          rem  <= trial;
          quot <= {quot[NW-2:0], 1'b0};
        end
        dividend <= dividend << 1;
        cnt <= cnt - 1'b1;
      end
    end else if (cal_valid) begin
      if (cal_ref) begin
        ref_sum <= cal_sum;
        gain    <= GAIN_W'(1 << GF);
      end else if (cal_sum == '0) begin
        gain    <= GAIN_W'(GMAX);
      end else begin
        divisor  <= cal_sum;
        dividend <= NW'(ref_sum) << GF;
        rem      <= '0;
        quot     <= '0;
        cnt      <= ($bits(cnt))'(NW);
        busy     <= 1'b1;
      end
    end
  end
endmodule
