// p2lsg_pkg -- constants and types shared by the P2LSG stochastic-computing
// blocks.
//
// DATA_W is the data precision and the log2 of the bit-stream length
// (8-bit grayscale pixels, N = 256 bits per value), the size every block
// uses by default. engine_state_e is the state of the per-pixel controller
// that both case-study engines use. vdc_groups() is the number of
// log2(B)-bit digits an index of w bits has once the top digit is
// zero-padded.
package p2lsg_pkg;

  localparam int unsigned DATA_W = 8;

  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,  // waiting for an input pixel
    ST_RUN  = 2'd1,  // streaming the N bits of one pixel
    ST_DONE = 2'd2   // result held until it is taken
  } engine_state_e;

  function automatic int unsigned vdc_groups(int unsigned w, int unsigned log2b);
    return (w + log2b - 1) / log2b;
  endfunction

endpackage
