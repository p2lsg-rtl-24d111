// p2lsg_up_counter -- W-bit binary up-counter, the index source of the
// P2LSG sequence generator.
//
// It produces the integers 0, 1, ..., 2^W-1 and wraps; each one is the index
// of the next sequence element. The chain of toggle flip-flops with all T
// inputs high, as the generator is usually drawn, is written here as a
// synchronous counter with the same count order (bit i toggles when all
// lower bits are 1), so the whole design runs on one clock edge. Reset,
// the synchronous clear and the enable are this design's additions.
//
// Timing: q changes on the rising clock edge after en (or clr) was high.
// at_max is combinational: q == 2^W-1, the last index of a period.
module p2lsg_up_counter #(
  parameter int unsigned W = p2lsg_pkg::DATA_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  output logic [W-1:0] q,
  output logic         at_max
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   q <= '0;
    else if (clr) q <= '0;
    else if (en)  q <= q + 1'b1;
  end

  assign at_max = &q;

endmodule
