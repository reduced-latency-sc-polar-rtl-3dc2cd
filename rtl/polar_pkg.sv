// polar_pkg: constants and helper functions shared by the look-ahead SC polar
// decoder. It holds the scheduler state encoding and two small index functions
// used both by the controller and by the register banks:
//   stage_w(n)        width of a stage number for a code of length 2^n
//   trailing_ones(v)  number of consecutive 1 bits from the LSB of v
// The trailing-ones count is what turns the recursive look-ahead time chart
// into a counter: after the last-stage cycle that decides bit pair i, the
// next cycle works on stage log2(N) - trailing_ones(i).
package polar_pkg;

  typedef enum logic [1:0] {
    SCH_IDLE  = 2'd0,   // waiting for codeword 1 (stage 1 runs when it comes)
    SCH_LOADB = 2'd1,   // stage 1 of codeword 2
    SCH_RUN   = 2'd2    // both codewords, stages 2..log2N, in lockstep
  } sched_state_e;

  function automatic int unsigned trailing_ones(input logic [31:0] v);
    int unsigned n;
    n = 0;
    for (int b = 0; b < 32; b++) begin
      if (v[b] && n == b) n = b + 1;
    end
    return n;
  endfunction

endpackage
