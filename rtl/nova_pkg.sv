// nova_pkg - types and constants shared by the NOVA NoC vector unit.
//
// NOVA replaces the slope/bias lookup tables of a piecewise-linear
// activation approximator with a broadcast on a line-topology NoC. A NoC
// link carries one flit per NoC cycle: eight (slope, bias) pairs of 16-bit
// words plus one tag bit, 8*2*16 + 1 = 257 bits, as the paper gives it.
// With 16 breakpoints the 16 pairs take two flits; the tag bit tells them
// apart and is matched against the least significant bit of a neuron's
// lookup address, the upper address bits pick one of the eight pairs.
//
// Word width 16 and 8 pairs per flit follow from the paper's 257-bit link.
// The fixed-point format (signed, FRAC_BITS fraction bits) is this design's
// own choice; the paper does not state one.
package nova_pkg;

  localparam int unsigned WORD_W         = 16;  // one word of a 257-bit flit
  localparam int unsigned PAIRS_PER_FLIT = 8;   // 8 pairs of slope and bias
  localparam int unsigned MAX_BP         = 16;  // breakpoints / pairs stored
  localparam int unsigned ADDR_W         = $clog2(MAX_BP);          // 4
  localparam int unsigned PAIR_IDX_W     = $clog2(PAIRS_PER_FLIT);  // 3
  localparam int unsigned FRAC_BITS      = 8;   // Q7.8 fixed point (assumed)

  typedef logic signed [WORD_W-1:0] word_t;
  typedef logic [ADDR_W-1:0]        lut_addr_t;

  typedef struct packed {
    word_t slope;
    word_t bias;
  } pair_t;

  typedef struct packed {
    logic                             tag;
    pair_t [PAIRS_PER_FLIT-1:0]       pairs;
  } flit_t;

  // Configuration write targets of the broadcast source.
  typedef enum logic {
    CFG_PAIR       = 1'b0,  // write slope/bias pair number cfg_addr
    CFG_BREAKPOINT = 1'b1   // write breakpoint number cfg_addr
  } cfg_sel_e;

endpackage
