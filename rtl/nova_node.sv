// nova_node - one NOVA stop: a router with the comparators and MACs of the
// NEURONS output neurons of the core attached to it.
//
// Per neuron: comparator (x -> lookup address) -> router local port (fetch
// slope/bias from the broadcast flits) -> MAC (a*x + b). The paper draws
// this unit as "NOVA router with the comparator and MAC" and shows it beside
// each REACT PE, TPU MXU or NVDLA convolution core; x comes from that core's
// output neurons and must stay stable for a whole base cycle.
//
// Timing: x presented during base cycle k gives y during base cycle k+2.
// The flit passes from east_in to west_out in the same NoC cycle when
// bypass_en is set, one NoC cycle later otherwise.
module nova_node
  import nova_pkg::*;
#(
  parameter int unsigned NEURONS = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  base_en,
  input  logic  bp16,
  input  logic  bypass_en,
  input  word_t breakpoints [MAX_BP],
  input  flit_t east_in,
  output flit_t west_out,
  input  logic  in_valid  [NEURONS],
  input  word_t x         [NEURONS],
  output logic  out_valid [NEURONS],
  output word_t y         [NEURONS],
  output logic  sat       [NEURONS]
);

  lut_addr_t addr  [NEURONS];
  word_t     slope [NEURONS];
  word_t     bias  [NEURONS];

  for (genvar n = 0; n < int'(NEURONS); n++) begin : g_cmp
    nova_comparator u_cmp (
      .x           (x[n]),
      .breakpoints (breakpoints),
      .bp16        (bp16),
      .addr        (addr[n])
    );
  end

  nova_router #(.NEURONS(NEURONS)) u_router (
    .clk       (clk),
    .rst_n     (rst_n),
    .base_en   (base_en),
    .bp16      (bp16),
    .bypass_en (bypass_en),
    .east_in   (east_in),
    .west_out  (west_out),
    .addr      (addr),
    .slope     (slope),
    .bias      (bias)
  );

  for (genvar n = 0; n < int'(NEURONS); n++) begin : g_mac
    nova_mac u_mac (
      .clk       (clk),
      .rst_n     (rst_n),
      .base_en   (base_en),
      .in_valid  (in_valid[n]),
      .x         (x[n]),
      .slope     (slope[n]),
      .bias      (bias[n]),
      .out_valid (out_valid[n]),
      .y         (y[n]),
      .sat       (sat[n])
    );
  end

endmodule
