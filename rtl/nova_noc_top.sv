// nova_noc_top - the NOVA NoC-based vector unit.
//
// NOVA evaluates a non-linear activation (softmax exponent, GeLU, ...) as a
// piecewise-linear function whose slopes and biases are not stored beside
// every neuron but broadcast, every NoC cycle, along a line of routers that
// snakes past all cores. Each neuron compares its value with the
// breakpoints, picks its segment's pair off the passing flit and applies
// y = a*x + b. Defaults follow the paper's REACT configuration: 10 routers
// (the most one NoC cycle can cross), 256 neurons per router, 16
// breakpoints sent as two 257-bit flits per base cycle.
//
// Structure: nova_broadcast_src -> node[0] -> node[1] -> ... -> node[N-1];
// the west output of the last router leaves as noc_tail. bypass_en[i]
// selects, per router, the registered or the bypass path of its east input;
// the paper's setting registers router 0 and bypasses the rest. The source
// is told whether an odd number of routers is registered and then sends its
// tags one NoC cycle early, so that for the routers behind the registers
// tag 1 is on the link in the base-clock strobe cycle. With 16 breakpoints,
// a router behind a different parity of registered routers than the rest
// would see the flits a NoC cycle late; the mapper must avoid such settings
// (the paper only notes that past 10 routers a broadcast needs several
// cycles). Which router registers is the mapper's choice.
//
// Interface: one NoC clock; base_tick marks the last NoC cycle of each base
// cycle. The cores change x and in_valid only after the clock edge that ends
// a base_tick cycle and hold them for the whole next base cycle. Results
// appear two base cycles later on y/out_valid; sat flags a clipped result.
// Configuration writes load pairs and breakpoints; bp16 chooses 16 or 8
// breakpoints (the NoC runs at 2x or 1x the base rate).
module nova_noc_top
  import nova_pkg::*;
#(
  parameter int unsigned NUM_ROUTERS = 10,
  parameter int unsigned NEURONS     = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  // mapper configuration
  input  logic      cfg_we,
  input  cfg_sel_e  cfg_sel,
  input  lut_addr_t cfg_addr,
  input  pair_t     cfg_wdata,
  input  logic      bp16,
  input  logic      bypass_en [NUM_ROUTERS],
  output logic      base_tick,
  // cores
  input  logic      in_valid  [NUM_ROUTERS][NEURONS],
  input  word_t     x         [NUM_ROUTERS][NEURONS],
  output logic      out_valid [NUM_ROUTERS][NEURONS],
  output word_t     y         [NUM_ROUTERS][NEURONS],
  output logic      sat       [NUM_ROUTERS][NEURONS],
  output flit_t     noc_tail
);

  flit_t      link [NUM_ROUTERS+1];
  word_t      breakpoints [MAX_BP];
  logic       base_en;
  logic       lead_odd;

  // Parity of the number of registered routers.
  always_comb begin
    lead_odd = 1'b0;
    for (int i = 0; i < int'(NUM_ROUTERS); i++)
      lead_odd = lead_odd ^ !bypass_en[i];
  end

  nova_broadcast_src u_src (
    .clk         (clk),
    .rst_n       (rst_n),
    .cfg_we      (cfg_we),
    .cfg_sel     (cfg_sel),
    .cfg_addr    (cfg_addr),
    .cfg_wdata   (cfg_wdata),
    .bp16        (bp16),
    .lead_odd    (lead_odd),
    .flit_out    (link[0]),
    .base_en     (base_en),
    .breakpoints (breakpoints)
  );

  for (genvar r = 0; r < int'(NUM_ROUTERS); r++) begin : g_node
    nova_node #(.NEURONS(NEURONS)) u_node (
      .clk         (clk),
      .rst_n       (rst_n),
      .base_en     (base_en),
      .bp16        (bp16),
      .bypass_en   (bypass_en[r]),
      .breakpoints (breakpoints),
      .east_in     (link[r]),
      .west_out    (link[r+1]),
      .in_valid    (in_valid[r]),
      .x           (x[r]),
      .out_valid   (out_valid[r]),
      .y           (y[r]),
      .sat         (sat[r])
    );
  end

  assign base_tick = base_en;
  assign noc_tail  = link[NUM_ROUTERS];

endmodule
