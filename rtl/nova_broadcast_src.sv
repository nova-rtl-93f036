// nova_broadcast_src - head of the NOVA NoC: what the mapper loads and the
// NoC broadcasts.
//
// Holds the MAX_BP slope/bias pairs of the current non-linear function and
// its breakpoints, written through a simple configuration port. Every NoC
// cycle it drives one flit of eight pairs and a tag bit into the east input
// of the first router. With 16 breakpoints (bp16) two flits are needed per
// base cycle, so the NoC runs at twice the base rate: flit tag t carries the
// pairs of segments 2*i + t in slot i (segment LSB = tag, upper bits = slot,
// the paper's matching rule). With 8 breakpoints one flit carries all pairs
// (slot i = segment i, tag 0) and the NoC runs at the base rate.
//
// The paper runs comparators and MACs on the accelerator clock and the NoC
// on a clock twice as fast. This design clocks everything with the NoC clock
// and gives the base-rate logic a clock enable, base_en, high in the last
// NoC cycle of each base cycle (every cycle in 8-breakpoint mode). That is
// this design's choice for the clock-domain crossing the paper leaves to
// standard techniques.
//
// lead_odd: set when an odd number of registered (non-bypassed) routers lie
// ahead of the routers being served. Each one delays the flit by a NoC
// cycle, so the source then sends the tags one cycle early to land tag 1 on
// the strobe cycle.
// The flit output is combinational from registers; in the default setting
// router 0 registers it (the paper's "clock edge registered at NoC inputs").
module nova_broadcast_src
  import nova_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration (from the mapper)
  input  logic                  cfg_we,
  input  cfg_sel_e              cfg_sel,
  input  lut_addr_t             cfg_addr,
  input  pair_t                 cfg_wdata,   // breakpoint: bias field
  input  logic                  bp16,
  input  logic                  lead_odd,    // odd number of registered routers
  // NoC side
  output flit_t                 flit_out,
  output logic                  base_en,
  output word_t                 breakpoints [MAX_BP]
);

  pair_t table_q [MAX_BP];
  word_t bp_q    [MAX_BP];
  logic  phase_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MAX_BP); i++) begin
        table_q[i] <= '0;
        bp_q[i]    <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_sel == CFG_PAIR) table_q[cfg_addr] <= cfg_wdata;
      else                     bp_q[cfg_addr]    <= cfg_wdata.bias;
    end
  end

  // Flit counter within the base cycle: 0,1,0,1... in 16-breakpoint mode.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    phase_q <= 1'b0;
    else if (bp16) phase_q <= ~phase_q;
    else           phase_q <= 1'b0;
  end

  assign base_en = !bp16 || phase_q;

  always_comb begin
    flit_out.tag = bp16 ? (phase_q ^ lead_odd) : 1'b0;
    for (int i = 0; i < int'(PAIRS_PER_FLIT); i++) begin
      if (bp16) flit_out.pairs[i] = table_q[{i[PAIR_IDX_W-1:0], flit_out.tag}];
      else      flit_out.pairs[i] = table_q[{1'b0, i[PAIR_IDX_W-1:0]}];
    end
  end

  for (genvar k = 0; k < int'(MAX_BP); k++) begin : g_bp
    assign breakpoints[k] = bp_q[k];
  end

endmodule
