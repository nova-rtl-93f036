// nova_comparator - lookup-address generator for one neuron.
//
// A PE output x is compared with the breakpoints d[0..N-1] of the
// piecewise-linear approximation, N = 16 or 8 (bp16 selects). The address is
// the number of breakpoints d[1..N-1] that x reaches (x >= d[k]), so for
// ascending breakpoints it is the index of the segment that holds x, 0..N-1:
// values below d[1] fall in segment 0, values at or above d[N-1] in segment
// N-1. The ">= d_n gives address n" rule is the paper's (its walkthrough
// table); treating d[0] as the open lower end of segment 0 is this design's
// choice so that N breakpoints address exactly N slope/bias pairs.
//
// Purely combinational: the PE holds x stable for a whole base-clock cycle,
// and the router samples the address during that cycle.
module nova_comparator
  import nova_pkg::*;
(
  input  word_t     x,                       // PE output (signed)
  input  word_t     breakpoints [MAX_BP],    // ascending, shared by all neurons
  input  logic      bp16,                    // 1: 16 breakpoints, 0: 8
  output lut_addr_t addr                     // segment index
);

  always_comb begin
    addr = '0;
    for (int k = 1; k < int'(MAX_BP); k++) begin
      if ((bp16 || k < int'(MAX_BP / 2)) && (x >= breakpoints[k]))
        addr = addr + lut_addr_t'(1);
    end
  end

endmodule
