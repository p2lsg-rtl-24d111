// sc_bilinear -- stochastic-computing bilinear interpolator, one output
// pixel per pass, as used for SC image scaling.
//
// I(x,y) = (1-u)(1-v) I11 + (1-u)v I12 + u(1-v) I21 + uv I22 is computed as
// a 4-to-1 MUX of bit-streams. The four neighbour pixels are encoded by four
// comparators that share one random number (their streams are correlated,
// which a MUX data input tolerates). u and v are encoded with two other
// P2LSG sequences and drive the select pins {su, sv}, so input 0 (I11) is
// chosen with probability (1-u)(1-v) and input 3 (I22) with probability uv.
// A ones counter turns the MUX output back into an 8-bit pixel.
//
// All three random sequences come from one P2LSG (one counter). The default
// bases, VDC-2 for the pixels and VDC-256 / VDC-64 for u / v, are this
// design's choice; so are the handshake and the restart of the sequence for
// every pixel. With PAR > 1 the comparators and the MUX are replicated per
// lane and a pixel takes 2^W / PAR cycles instead of 2^W.
//
// Interface: pix[0..3] = I11, I12, I21, I22; u and v are the fractional
// offsets scaled to [0, 2^W). in_valid/in_ready accept a pixel,
// out_valid/out_ready return out_pix (count of 1s over 2^W bits, saturated
// to 2^W-1). Timing: out_valid rises on the 2^W/PAR-th clock edge after the
// accepting edge, so a pixel occupies the engine for 2^W/PAR + 2 cycles
// (258 at PAR = 1, 66 at PAR = 4) including the handshake.
module sc_bilinear #(
  parameter int unsigned W          = p2lsg_pkg::DATA_W,
  parameter int unsigned PAR        = 1,
  parameter int unsigned LOG2B_DATA = 1,
  parameter int unsigned LOG2B_U    = 8,
  parameter int unsigned LOG2B_V    = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [3:0][W-1:0]   pix,
  input  logic [W-1:0]        u,
  input  logic [W-1:0]        v,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [W-1:0]        out_pix
);

  localparam int unsigned NSEQ = 3;
  localparam int unsigned SEQ_D = 0, SEQ_U = 1, SEQ_V = 2;
  localparam int unsigned LOG2B [NSEQ] = '{LOG2B_DATA, LOG2B_U, LOG2B_V};

  logic                           load, run, gen_last;
  logic [3:0][W-1:0]              pix_q;
  logic [W-1:0]                   u_q, v_q;
  logic [NSEQ-1:0][PAR-1:0][W-1:0] rnd;
  logic [PAR-1:0]                 mux_bits;
  logic [W:0]                     count;

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
      pix_q <= '0;
      u_q   <= '0;
      v_q   <= '0;
    end else if (load) begin
      pix_q <= pix;
      u_q   <= u;
      v_q   <= v;
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
    logic [3:0] pix_bits;
    logic       su, sv;
    for (genvar i = 0; i < 4; i++) begin : g_pix
      sng #(.W(W)) u_sng (.x(pix_q[i]), .r(rnd[SEQ_D][p]), .bit_o(pix_bits[i]));
    end
    sng #(.W(W)) u_sng_u (.x(u_q), .r(rnd[SEQ_U][p]), .bit_o(su));
    sng #(.W(W)) u_sng_v (.x(v_q), .r(rnd[SEQ_V][p]), .bit_o(sv));
    sc_mux #(.NIN(4)) u_mux (.in_bits(pix_bits), .sel({su, sv}), .out_bit(mux_bits[p]));
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
