// nova_mac - multiply-add stage of one neuron's approximator: y = a*x + b.
//
// Two registers per neuron, both advanced by the base-clock strobe base_en
// (the comparators and MACs run at the accelerator clock, the NoC at a
// multiple of it). Stage 1 holds x and its valid bit while the router
// fetches the slope a and bias b for x's segment; stage 2 holds the result.
// An input presented during base cycle k therefore appears on y during base
// cycle k+2: one cycle to fetch the pair, one for the MAC, as the paper
// describes.
//
// Arithmetic (this design's choice, the paper gives no number format):
// x, a, b are signed fixed point with FRAC_BITS fraction bits; the full
// 32-bit product is shifted right arithmetically by FRAC_BITS, b is added,
// and the sum saturates to the 16-bit word range. sat flags a clipped result.
module nova_mac
  import nova_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  base_en,   // one NoC-clock cycle per base-clock cycle
  input  logic  in_valid,  // x valid during this base cycle
  input  word_t x,         // PE output, stable for the base cycle
  input  word_t slope,     // pair fetched for the stage-1 x
  input  word_t bias,
  output logic  out_valid,
  output word_t y,
  output logic  sat
);

  localparam int signed WMAX = 2 ** (WORD_W - 1) - 1;
  localparam int signed WMIN = -(2 ** (WORD_W - 1));

  word_t x_q;
  logic  v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0;
      v_q <= 1'b0;
    end else if (base_en) begin
      x_q <= x;
      v_q <= in_valid;
    end
  end

  logic signed [2*WORD_W-1:0] prod;
  logic signed [2*WORD_W:0]   sum;
  word_t                      y_d;
  logic                       sat_d;

  always_comb begin
    prod  = x_q * slope;
    sum   = (2*WORD_W+1)'(prod >>> FRAC_BITS) + (2*WORD_W+1)'(bias);
    sat_d = 1'b0;
    if (sum > (2*WORD_W+1)'(WMAX)) begin
      y_d   = word_t'(WMAX);
      sat_d = 1'b1;
    end else if (sum < (2*WORD_W+1)'(WMIN)) begin
      y_d   = word_t'(WMIN);
      sat_d = 1'b1;
    end else begin
      y_d = word_t'(sum);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y         <= '0;
      out_valid <= 1'b0;
      sat       <= 1'b0;
    end else if (base_en) begin
      y         <= y_d;
      out_valid <= v_q;
      sat       <= v_q & sat_d;
    end
  end

endmodule
