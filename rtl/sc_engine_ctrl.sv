// sc_engine_ctrl -- per-pixel controller shared by the SC case-study engines.
//
// A pixel is accepted with a valid/ready handshake (in_valid && in_ready).
// The accept cycle raises load: the engine latches its operands and clears
// its P2LSG and its ones counter. The controller then holds run high while
// the generator walks through one full period (2^W / PAR cycles), ending on
// the cycle in which the generator reports last. The result is then held
// with out_valid high until out_ready takes it; a stalled output keeps the
// engine from accepting the next pixel. All outputs are decoded from the
// registered state. The handshake and the restart per pixel are this
// design's choices.
//
// Timing: with the accept on edge 0, run is high from edge 0 to edge
// 2^W/PAR (the generator's last elements are consumed on that edge), and
// out_valid is high from edge 2^W/PAR on. The result can be taken on edge
// 2^W/PAR + 1 at the earliest, and the next pixel accepted one edge later.
// The assertion uses rst_n as its disable condition while the flip-flops use
// it as an asynchronous reset; lint reports that double use, which is
// intended.
module sc_engine_ctrl
  import p2lsg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic gen_last,
  output logic load,
  output logic run,
  output logic out_valid,
  input  logic out_ready
);

  engine_state_e state, state_nx;

  always_comb begin
    state_nx = state;
    unique case (state)
      ST_IDLE: if (in_valid)          state_nx = ST_RUN;
      ST_RUN:  if (gen_last)          state_nx = ST_DONE;
      ST_DONE: if (out_ready)         state_nx = ST_IDLE;
      default:                        state_nx = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_IDLE;
    else        state <= state_nx;
  end

  assign in_ready  = (state == ST_IDLE);
  assign load      = in_ready && in_valid;
  assign run       = (state == ST_RUN);
  assign out_valid = (state == ST_DONE);

  // a result that is offered stays offered until it is taken
  a_hold_valid: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid);

endmodule
