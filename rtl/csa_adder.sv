// Multi-operand signed adder built as a carry-save chain: NIN operands are
// reduced with 3:2 compressors (full-adder rows, no carry propagation) to a
// sum and a carry vector, and one carry-propagate adder forms the result.
// Combinational.  Used by the LIF unit to merge the local sums that the SAs
// of one row block deliver for the same output column.
module csa_adder #(
  parameter int NIN  = 4,
  parameter int IN_W = 6,
  parameter int OW   = IN_W + $clog2(NIN) + 1
) (
  input  logic signed [NIN-1:0][IN_W-1:0] in,
  output logic signed [OW-1:0]            sum
);
  logic [OW-1:0] s, c, x;
  always_comb begin
    s = OW'(signed'(in[0]));
    c = '0;
    for (int i = 1; i < NIN; i++) begin
      x = OW'(signed'(in[i]));
      // 3:2 compressor on (s, c, x)
      {s, c} = {s ^ c ^ x, ((s & c) | (s & x) | (c & x)) << 1};
    end
    sum = signed'(s + c);
  end
endmodule
