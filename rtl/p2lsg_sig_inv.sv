// p2lsg_sig_inv -- hard-wired significance inversion: turns a W-bit index
// into the W-bit Van der Corput number of base B = 2^LOG2B.
//
// The index bits are cut into LOG2B-bit digits starting at the LSB, and the
// top digit is zero-padded when W is not a multiple of LOG2B. The digit
// order is then reversed: the least significant digit becomes the most
// significant one, while the bit order inside each digit is kept. Of the
// reversed G*LOG2B bits, the W most significant are the output and the rest
// are dropped. The result is floor(2^W * sum_k d_k * B^-(k+1)), the base-B
// radical inverse scaled to [0, 2^W), ready for the SNG comparator.
//
// Examples for W = 8 (MSB first): base 2 gives b0..b7 (bit reversal);
// base 4 gives b1b0 b3b2 b5b4 b7b6; base 8 gives b2b1b0 b5b4b3 0b7
// (b6 dropped); base 16 gives b3b2b1b0 b7b6b5b4; base 256 is the identity.
//
// Pure wiring, no gates and no timing. LOG2B must lie in 1..W.
module p2lsg_sig_inv #(
  parameter int unsigned W     = p2lsg_pkg::DATA_W,
  parameter int unsigned LOG2B = 4
) (
  input  logic [W-1:0] idx,
  output logic [W-1:0] rnd
);

  localparam int unsigned G  = p2lsg_pkg::vdc_groups(W, LOG2B);  // digits
  localparam int unsigned PW = G * LOG2B;                        // padded width

  // Output bit j sits at position POS = PW-W+j of the reversed number, in
  // reversed digit POS/LOG2B at offset POS%LOG2B. That digit came from index
  // digit G-1-POS/LOG2B, which gives the source bit SRC. Sources at or above
  // W are padding and read as zero. Only the kept bits are built, so the
  // dropped low bits of the reversed number never exist as signals.
  for (genvar j = 0; j < W; j++) begin : g_bit
    localparam int unsigned POS = PW - W + j;
    localparam int unsigned SRC = (G - 1 - POS / LOG2B) * LOG2B + POS % LOG2B;
    if (SRC < W) begin : g_wire
      assign rnd[j] = idx[SRC];
    end else begin : g_pad
      assign rnd[j] = 1'b0;
    end
  end

  initial begin
    assert (LOG2B >= 1 && LOG2B <= W)
      else $error("p2lsg_sig_inv: LOG2B=%0d must lie in 1..W=%0d", LOG2B, W);
  end

endmodule
