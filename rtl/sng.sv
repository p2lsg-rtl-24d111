// sng -- comparator of a stochastic number generator (SNG).
//
// One bit of the unipolar bit-stream of x is produced per random number r:
// the bit is 1 when x > r. Over the 2^W numbers of a full P2LSG period
// (a permutation of 0..2^W-1) exactly x bits are 1, so the stream encodes
// x / 2^W. Purely combinational.
module sng #(
  parameter int unsigned W = p2lsg_pkg::DATA_W
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] r,
  output logic         bit_o
);

  assign bit_o = (x > r);

endmodule
