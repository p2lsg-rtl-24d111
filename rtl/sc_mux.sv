// sc_mux -- stochastic scaled adder: an NIN-to-1 multiplexer of bit-streams.
//
// When the select bits are stochastic streams that are uncorrelated with the
// data streams, the output stream's probability of a 1 is the sum of the
// data probabilities weighted by the probability of each select code. A
// 2-to-1 MUX with select s gives P(x0)(1-P(s)) + P(x1)P(s); a 4-to-1 MUX
// with sel = {su, sv} gives the bilinear weights (1-u)(1-v), (1-u)v,
// u(1-v), uv for inputs 0..3. Purely combinational; NIN must be a power of
// two of at least 2.
module sc_mux #(
  parameter int unsigned NIN = 2
) (
  input  logic [NIN-1:0]         in_bits,
  input  logic [$clog2(NIN)-1:0] sel,
  output logic                   out_bit
);

  assign out_bit = in_bits[sel];

endmodule
