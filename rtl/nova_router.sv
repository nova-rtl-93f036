// nova_router - one router of the NOVA line-topology NoC.
//
// Each router has two input ports and two output ports. The east input
// carries the 257-bit broadcast flit from the previous router (or from the
// broadcast source); the local input carries the lookup addresses of the
// NEURONS neurons of the attached core. The west output passes the flit on
// to the next router; the local output returns, per neuron, the slope and
// bias of that neuron's segment to its MAC.
//
// East input: a register R and a bypass path. With bypass_en = 1 the flit
// goes straight through (in silicon, the clockless repeaters that let one
// flit cross up to 10 routers in one NoC cycle); with bypass_en = 0 it is
// taken from R, one NoC cycle later. Because the route is fixed there is no
// flow control: the mapper only sets bypass_en per router. The paper's
// figure registers the flit at the first router and bypasses the others.
//
// Local fetch: in 16-breakpoint mode (bp16) a neuron's address LSB must
// equal the flit's tag bit and address bits [3:1] pick one of the eight
// pairs; in 8-breakpoint mode every flit matches and bits [2:0] pick the
// pair. Both rules are the paper's. The two flits of one base cycle arrive
// in consecutive NoC cycles, so a matching pair from the first flit is kept
// in a hold register and, at the base-clock strobe (the NoC cycle in which
// the last flit, tag 1, is on the link), the neuron's output register loads
// either the live match or the held one. Hold and output registers are this
// design's choice; the paper only states that each core fetches its pair and
// sends it to the MAC in the next cycle. slope/bias are valid for one whole
// base cycle after the strobe.
module nova_router
  import nova_pkg::*;
#(
  parameter int unsigned NEURONS = 256
) (
  input  logic      clk,                 // NoC clock
  input  logic      rst_n,
  input  logic      base_en,             // last NoC cycle of a base cycle
  input  logic      bp16,                // 1: 16 breakpoints in two flits
  input  logic      bypass_en,           // 1: bypass R, 0: take flit from R
  input  flit_t     east_in,
  output flit_t     west_out,
  input  lut_addr_t addr  [NEURONS],     // local input: lookup addresses
  output word_t     slope [NEURONS],     // local output
  output word_t     bias  [NEURONS]
);

  flit_t buf_q;
  flit_t flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) buf_q <= '0;
    else        buf_q <= east_in;
  end

  // 2x2 crossbar, east side: the flit this router sees and forwards west.
  assign flit     = bypass_en ? east_in : buf_q;
  assign west_out = flit;

  // 2x2 crossbar, local side: tag match and pair select per neuron.
  pair_t hold_q [NEURONS];
  pair_t out_q  [NEURONS];

  for (genvar n = 0; n < int'(NEURONS); n++) begin : g_neuron
    logic                  match;
    logic [PAIR_IDX_W-1:0] idx;
    pair_t                 sel;

    always_comb begin
      match = !bp16 || (addr[n][0] == flit.tag);
      idx   = bp16 ? addr[n][ADDR_W-1:1] : addr[n][PAIR_IDX_W-1:0];
      sel   = flit.pairs[idx];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        hold_q[n] <= '0;
        out_q[n]  <= '0;
      end else begin
        if (match)   hold_q[n] <= sel;
        if (base_en) out_q[n]  <= match ? sel : hold_q[n];
      end
    end

    assign slope[n] = out_q[n].slope;
    assign bias[n]  = out_q[n].bias;
  end

  // The mapper must launch the flits so that tag 1 is on this router's link
  // in the NoC cycle of the base-clock strobe.
  a_tag_aligned : assert property (@(posedge clk) disable iff (!rst_n)
    (base_en && bp16) |-> flit.tag)
    else $error("nova_router: flit tag not aligned to base clock");

endmodule
