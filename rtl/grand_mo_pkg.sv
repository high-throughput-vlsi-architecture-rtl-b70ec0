// grand_mo_pkg -- constants and helpers shared by the GRAND-MO decoder.
//
// The default sizes are the main configuration: code length n = 128, up to
// n-k = 32 parity bits (code rates 0.75 .. 1), at most m = 2 noise bursts and
// burst lengths l1, l2 <= 32. wc_steps() is the worst-case number of time
// steps (clock cycles) of the decoder, L*(2n-L-3)/2 + 2 with L = min(l1,l2);
// for m = 1 (L = 0) it gives 2: one cycle for the syndrome check of r and one
// for all single-burst patterns.
package grand_mo_pkg;

  localparam int unsigned N_DEF    = 128;  // code length n
  localparam int unsigned NK_DEF   = 32;   // largest number of parity bits n-k
  localparam int unsigned LMAX_DEF = 32;   // largest burst length l1, l2
  localparam int unsigned MMAX     = 2;    // largest number of bursts m

  // Decoder state of the controller.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,  // waiting for a received word
    ST_CHECK = 2'd1,  // syndrome check of r itself
    ST_STEP  = 2'd2,  // one time step of test error patterns
    ST_DONE  = 2'd3   // result held until accepted
  } state_e;

  // Worst-case number of time steps for code length n and L = min(l1,l2)
  // (L = 0 for m = 1).
  function automatic int unsigned wc_steps(int unsigned n, int unsigned l);
    return (l * (2 * n - l - 3)) / 2 + 2;
  endfunction

endpackage
