// tb_nova_node - self-checking test of one NOVA node (router, comparators
// and MACs of 8 neurons).
//
// The testbench acts as the broadcast source (two flits per base cycle, or
// one in 8-breakpoint mode) and as the core (random x every base cycle,
// random valid). Every output is compared with the reference model two base
// cycles after its x was presented, which also checks the latency. The
// west output must repeat the east input (bypass path).
module tb_nova_node;
  import nova_pkg::*;
  import nova_tb_pkg::*;

  localparam int N = 8;

  logic  clk = 1'b0, rst_n = 1'b0, base_en = 1'b0, bp16 = 1'b1, bypass_en = 1'b1;
  word_t bps [MAX_BP];
  flit_t east_in = '0, west_out;
  logic  in_valid [N], out_valid [N], sat [N];
  word_t x [N], y [N];
  int    checks = 0, failures = 0, nsat = 0, ncyc16 = 0, ncyc8 = 0;

  nova_node #(.NEURONS(N)) dut (.clk, .rst_n, .base_en, .bp16, .bypass_en,
    .breakpoints(bps), .east_in, .west_out, .in_valid, .x, .out_valid, .y, .sat);

  always #1 clk = ~clk;

  pair_t tbl [MAX_BP];
  word_t ey [3][N];
  logic  ev [3][N], es [3][N];

  task automatic check_outputs(int slot);
    for (int n = 0; n < N; n++) begin
      checks++;
      if (out_valid[n] !== ev[slot][n] ||
          (ev[slot][n] && (y[n] !== ey[slot][n] || sat[n] !== es[slot][n]))) begin
        failures++;
        $display("FAIL neuron %0d y=%0d exp=%0d v=%0d/%0d", n, y[n], ey[slot][n],
                 out_valid[n], ev[slot][n]);
      end
      if (ev[slot][n] && es[slot][n]) nsat++;
    end
  endtask

  // One base cycle k: present x, send the flits, strobe.
  task automatic base_cycle(int k, logic mode16);
    int slot;
    slot = k % 3;
    @(negedge clk);
    bp16 = mode16;
    if (k >= 2) check_outputs((k + 1) % 3);  // results of cycle k-2
    for (int n = 0; n < N; n++) begin
      logic s;
      x[n]        = (n == 0) ? word_t'(16'sh7fff) : word_t'($urandom);
      in_valid[n] = ($urandom_range(0, 4) != 0);
      ev[slot][n] = in_valid[n];
      ey[slot][n] = ref_mac(x[n], tbl[ref_seg(x[n], bps, bp16 ? 16 : 8)].slope,
                            tbl[ref_seg(x[n], bps, bp16 ? 16 : 8)].bias, s);
      es[slot][n] = s;
    end
    if (bp16) begin
      east_in = ref_flit(tbl, 1'b1, 1'b0); base_en = 1'b0;
      #0.1 checks++; if (west_out !== east_in) failures++;
      @(negedge clk);
      east_in = ref_flit(tbl, 1'b1, 1'b1); base_en = 1'b1;
      ncyc16++;
    end else begin
      east_in = ref_flit(tbl, 1'b0, 1'b0); base_en = 1'b1;
      ncyc8++;
    end
    #0.1 checks++; if (west_out !== east_in) failures++;
  endtask

  initial begin
    #40000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin x[n] = '0; in_valid[n] = 1'b0; end
    for (int s = 0; s < 16; s++) begin
      bps[s] = word_t'(-16384 + 2048 * s);
      tbl[s] = '{slope: word_t'($urandom_range(0, 1023) - 512), bias: word_t'($urandom)};
    end
    tbl[15].slope = 16'sh4000;  // steep last segment: x = max saturates
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 60; k++) begin
      base_cycle(k, (k < 30) ? 1'b1 : 1'b0);
    end
    checks++;
    if (nsat == 0 || ncyc16 == 0 || ncyc8 == 0) begin
      failures++; $display("FAIL mechanism not exercised sat=%0d", nsat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
