// p2lsg -- Powers-of-2 Low-discrepancy Sequence Generator.
//
// One up-counter drives NSEQ hard-wired significance inversions, one per
// base B_s = 2^LOG2B[s], so that NSEQ different low-discrepancy sequences
// (VDC-B_s, the Van der Corput sequences of power-of-two bases) come from a
// single counter with no logic beyond the counter itself. For W = 8 and the
// defaults the two outputs are the VDC-4 and VDC-16 sequences in [0, 256).
//
// Parallel form (PAR > 1, a power of two): the low log2(PAR) index bits are
// reserved and filled with the constant lane number p, and only the upper
// W - log2(PAR) bits come from a smaller counter. Lane p then carries index
// PAR*count + p, so each clock delivers PAR consecutive elements of every
// sequence and a full period of 2^W elements takes 2^W / PAR cycles.
// PAR = 1 is the plain sequential generator.
//
// Interface: rnd[s][p] is element PAR*count + p of sequence s. en advances
// the counter, clr restarts it at index 0 on the next edge. last is high
// while rnd holds the final PAR elements of a period (count all ones).
// The counter, the lane indexing and the inversion follow the published
// P2LSG construction; reset, clr, en and last are this design's additions.
module p2lsg #(
  parameter int unsigned W            = p2lsg_pkg::DATA_W,
  parameter int unsigned PAR          = 1,
  parameter int unsigned NSEQ         = 2,
  parameter int unsigned LOG2B [NSEQ] = '{2, 4}
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clr,
  input  logic                             en,
  output logic [NSEQ-1:0][PAR-1:0][W-1:0]  rnd,
  output logic                             last
);

  localparam int unsigned PW = $clog2(PAR);  // reserved lane-index bits
  localparam int unsigned CW = W - PW;       // reduced counter width

  logic [CW-1:0] cnt;

  p2lsg_up_counter #(.W(CW)) u_cnt (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (clr),
    .en     (en),
    .q      (cnt),
    .at_max (last)
  );

  for (genvar p = 0; p < PAR; p++) begin : g_lane
    logic [W-1:0] idx;
    if (PW == 0) begin : g_seq
      assign idx = cnt;
    end else begin : g_par
      localparam logic [PW-1:0] LANE = PW'(p);
      assign idx = {cnt, LANE};
    end
    for (genvar s = 0; s < NSEQ; s++) begin : g_base
      p2lsg_sig_inv #(.W(W), .LOG2B(LOG2B[s])) u_inv (
        .idx (idx),
        .rnd (rnd[s][p])
      );
    end
  end

  initial begin
    assert (PAR >= 1 && (PAR & (PAR - 1)) == 0 && PW < W)
      else $error("p2lsg: PAR=%0d must be a power of two below 2^W", PAR);
  end

endmodule
