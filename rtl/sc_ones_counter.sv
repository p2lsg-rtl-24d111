// sc_ones_counter -- stochastic-to-binary converter.
//
// Counts the 1s of the output bit-stream: each enabled cycle it adds the
// number of 1s among the PAR bits of that cycle to a CW-bit accumulator.
// After a full stream of N bits the count is N times the value the stream
// encodes. The popcount-and-add structure is this design's choice.
//
// Timing: count is registered; it includes the bits of every cycle up to
// the previous clock edge. clr restarts at 0 on the next edge and takes
// priority over en.
module sc_ones_counter #(
  parameter int unsigned PAR = 1,
  parameter int unsigned CW  = p2lsg_pkg::DATA_W + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           en,
  input  logic [PAR-1:0] bits,
  output logic [CW-1:0]  count
);

  logic [CW-1:0] ones;

  always_comb begin
    ones = '0;
    for (int unsigned p = 0; p < PAR; p++) ones += CW'(bits[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (en)  count <= count + ones;
  end

endmodule
