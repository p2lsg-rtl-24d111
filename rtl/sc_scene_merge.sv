// sc_scene_merge -- stochastic-computing scene merging (alpha blending) of
// one pixel per pass.
//
// merged = background * (1 - alpha) + foreground * alpha is a 2-to-1 MUX of
// bit-streams: background and foreground are encoded by two comparators
// that share one random number, alpha is encoded with a second P2LSG
// sequence and drives the select pin (1 picks the foreground). A ones
// counter turns the MUX output back into a pixel value.
//
// Both sequences come from one P2LSG. The default bases, VDC-2 for the
// pixels and VDC-256 (the plain counter) for alpha, are this design's
// choice, as are the handshake and the restart of the sequence per pixel.
// With PAR > 1 the comparators and the MUX are replicated per lane.
//
// Interface: bg, fg and alpha in [0, 2^W); out_pix is the count of 1s over
// 2^W bits, saturated to 2^W-1. in_valid/in_ready and out_valid/out_ready
// handshakes. Timing: out_valid rises on the 2^W/PAR-th clock edge after
// the accepting edge; a pixel occupies the engine for 2^W/PAR + 2 cycles.
module sc_scene_merge #(
  parameter int unsigned W          = p2lsg_pkg::DATA_W,
  parameter int unsigned PAR        = 1,
  parameter int unsigned LOG2B_DATA = 1,
  parameter int unsigned LOG2B_SEL  = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  bg,
  input  logic [W-1:0]  fg,
  input  logic [W-1:0]  alpha,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_pix
);

  localparam int unsigned NSEQ = 2;
  localparam int unsigned SEQ_D = 0, SEQ_S = 1;
  localparam int unsigned LOG2B [NSEQ] = '{LOG2B_DATA, LOG2B_SEL};

  logic                            load, run, gen_last;
  logic [W-1:0]                    bg_q, fg_q, alpha_q;
  logic [NSEQ-1:0][PAR-1:0][W-1:0] rnd;
  logic [PAR-1:0]                  mux_bits;
  logic [W:0]                      count;

  sc_engine_ctrl u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .gen_last  (gen_last),
    .load      (load),
    .run       (run),
    .out_valid (out_valid),
    .out_ready (out_ready)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bg_q    <= '0;
      fg_q    <= '0;
      alpha_q <= '0;
    end else if (load) begin
      bg_q    <= bg;
      fg_q    <= fg;
      alpha_q <= alpha;
    end
  end

  p2lsg #(.W(W), .PAR(PAR), .NSEQ(NSEQ), .LOG2B(LOG2B)) u_gen (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (load),
    .en    (run),
    .rnd   (rnd),
    .last  (gen_last)
  );

  for (genvar p = 0; p < PAR; p++) begin : g_lane
    logic bg_bit, fg_bit, sel_bit;
    sng #(.W(W)) u_sng_bg (.x(bg_q),    .r(rnd[SEQ_D][p]), .bit_o(bg_bit));
    sng #(.W(W)) u_sng_fg (.x(fg_q),    .r(rnd[SEQ_D][p]), .bit_o(fg_bit));
    sng #(.W(W)) u_sng_a  (.x(alpha_q), .r(rnd[SEQ_S][p]), .bit_o(sel_bit));
    sc_mux #(.NIN(2)) u_mux (.in_bits({fg_bit, bg_bit}), .sel(sel_bit), .out_bit(mux_bits[p]));
  end

  sc_ones_counter #(.PAR(PAR), .CW(W + 1)) u_ones (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (load),
    .en    (run),
    .bits  (mux_bits),
    .count (count)
  );

  assign out_pix = count[W] ? '1 : count[W-1:0];

  a_hold_data: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> $stable(out_pix));

endmodule
