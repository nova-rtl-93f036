// tb_nova_noc_top - end-to-end test of the NOVA NoC at its default size
// (10 routers x 256 neurons, 16 breakpoints).
//
// The testbench plays the mapper and the cores. It loads a 16-segment
// chord approximation of GeLU on [-4, 4) (breakpoints every 0.5, Q7.8),
// then presents random values to all 2560 neurons every base cycle and
// compares each result, two base cycles later, with the reference model.
// Values inside [-4, 4) must also lie within 0.06 of the real GeLU. Phases:
//   A  16 breakpoints, router 0 registered, routers 1..9 bypassed (the
//      setting of the paper's walkthrough figure)
//   B  16 breakpoints, every router bypassed
//   C  8 breakpoints (the NoC at the base rate) with a steep random table
//      that drives results into saturation
//   D  back to 16 breakpoints, GeLU reloaded
// Each mechanism is counted (tag-0 and tag-1 fetches, registered and bypass
// router hops, both modes, saturation, idle neurons) and a mechanism that
// never happened counts as a failure. The flit leaving the last router is
// checked against the reference flit every NoC cycle.
module tb_nova_noc_top;
  import nova_pkg::*;
  import nova_tb_pkg::*;

  localparam int NR = 10;   // defaults of nova_noc_top
  localparam int NN = 256;

  logic      clk = 1'b0, rst_n = 1'b0;
  logic      cfg_we = 1'b0, bp16 = 1'b1;
  cfg_sel_e  cfg_sel = CFG_PAIR;
  lut_addr_t cfg_addr = '0;
  pair_t     cfg_wdata = '0;
  logic      bypass_en [NR];
  logic      base_tick;
  logic      in_valid  [NR][NN];
  word_t     x         [NR][NN];
  logic      out_valid [NR][NN];
  word_t     y         [NR][NN];
  logic      sat       [NR][NN];
  flit_t     noc_tail;

  nova_noc_top dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata, .bp16,
                    .bypass_en, .base_tick, .in_valid, .x, .out_valid, .y, .sat,
                    .noc_tail);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int n_tag0 = 0, n_tag1 = 0, n_reg = 0, n_byp = 0, n_bp16 = 0, n_bp8 = 0;
  int n_sat = 0, n_idle = 0, n_gelu = 0;
  real max_err = 0.0;

  pair_t tbl [MAX_BP];
  word_t bps [MAX_BP];
  word_t ey [3][NR][NN];
  logic  ev [3][NR][NN], es [3][NR][NN];
  logic  gelu_mode = 1'b1;

  function automatic real gelu(real v);
    return 0.5 * v * (1.0 + $tanh(0.7978845608 * (v + 0.044715 * v * v * v)));
  endfunction

  task automatic fail(string what);
    failures++;
    if (failures < 20) $display("FAIL %s", what);
  endtask

  int tail_quiet = 0;  // NoC cycles in which the tail flit is not checked

  task automatic cfg_write(cfg_sel_e sel, int a, pair_t d);
    @(negedge clk);
    tail_quiet = 3;
    cfg_we = 1'b1; cfg_sel = sel; cfg_addr = lut_addr_t'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic load_gelu();
    tail_quiet = 3;
    for (int k = 0; k < 16; k++) begin
      real d0, d1, a, b;
      d0 = -4.0 + 0.5 * k;
      d1 = d0 + 0.5;
      a  = (gelu(d1) - gelu(d0)) / 0.5;
      b  = gelu(d0) - a * d0;
      bps[k] = word_t'(-1024 + 128 * k);
      tbl[k] = '{slope: word_t'($rtoi(a * 256.0 + (a >= 0 ? 0.5 : -0.5))),
                 bias:  word_t'($rtoi(b * 256.0 + (b >= 0 ? 0.5 : -0.5)))};
      cfg_write(CFG_PAIR, k, tbl[k]);
      cfg_write(CFG_BREAKPOINT, k, '{slope: '0, bias: bps[k]});
    end
    gelu_mode = 1'b1;
  endtask

  task automatic load_steep();
    tail_quiet = 3;
    for (int k = 0; k < 16; k++) begin
      bps[k] = word_t'(-16384 + 4096 * k);
      tbl[k] = '{slope: word_t'($urandom_range(0, 8191) - 4096), bias: word_t'($urandom)};
      cfg_write(CFG_PAIR, k, tbl[k]);
      cfg_write(CFG_BREAKPOINT, k, '{slope: '0, bias: bps[k]});
    end
    gelu_mode = 1'b0;
  endtask

  task automatic check_outputs(int slot);
    for (int r = 0; r < NR; r++)
      for (int n = 0; n < NN; n++) begin
        checks++;
        if (out_valid[r][n] !== ev[slot][r][n] ||
            (ev[slot][r][n] && (y[r][n] !== ey[slot][r][n] || sat[r][n] !== es[slot][r][n])))
          fail($sformatf("router %0d neuron %0d y=%0d exp=%0d valid=%0d/%0d", r, n,
                         y[r][n], ey[slot][r][n], out_valid[r][n], ev[slot][r][n]));
        if (ev[slot][r][n] && es[slot][r][n]) n_sat++;
      end
  endtask

  // Ends at the NoC cycle after the base-cycle strobe edge.
  task automatic wait_strobe();
    while (base_tick !== 1'b1) @(negedge clk);
    @(negedge clk);
  endtask

  // The flit leaving the last router must equal the reference flit for
  // the base-cycle position it is in.
  always @(negedge clk) if (tail_quiet > 0) tail_quiet--; else if (rst_n) begin
    logic t;
    t = bp16 ? base_tick : 1'b0;
    if (noc_tail !== ref_flit(tbl, bp16, t)) fail("noc_tail flit");
    else if (bp16) begin
      if (t) n_tag1++; else n_tag0++;
    end
  end

  // Base cycle k: present x at its start, check the results of cycle k-2.
  int kk = 0;
  task automatic base_cycle();
    int slot;
    slot = kk % 3;
    if (kk >= 2) check_outputs((kk + 1) % 3);
    for (int r = 0; r < NR; r++) begin
      if (bypass_en[r]) n_byp++; else n_reg++;
      for (int n = 0; n < NN; n++) begin
        logic  s;
        int    sg;
        word_t xv;
        if (gelu_mode) xv = word_t'($urandom_range(0, 2047) - 1024);   // [-4, 4)
        else           xv = word_t'($urandom);
        x[r][n]        = xv;
        in_valid[r][n] = ($urandom_range(0, 15) != 0);
        if (!in_valid[r][n]) n_idle++;
        sg = ref_seg(xv, bps, bp16 ? 16 : 8);
        ey[slot][r][n] = ref_mac(xv, tbl[sg].slope, tbl[sg].bias, s);
        es[slot][r][n] = s;
        ev[slot][r][n] = in_valid[r][n];
        if (gelu_mode && in_valid[r][n]) begin
          real err;
          err = real'(ey[slot][r][n]) / 256.0 - gelu(real'(xv) / 256.0);
          if (err < 0.0) err = -err;
          if (err > max_err) max_err = err;
          n_gelu++;
        end
      end
    end
    if (bp16) n_bp16++; else n_bp8++;
    kk++;
    wait_strobe();
  endtask

  // Stop presenting work and let the pipeline empty (two base cycles).
  task automatic drain();
    for (int i = 0; i < 3; i++) begin
      int slot;
      slot = kk % 3;
      if (kk >= 2) check_outputs((kk + 1) % 3);
      for (int r = 0; r < NR; r++)
        for (int n = 0; n < NN; n++) begin
          in_valid[r][n] = 1'b0;
          ev[slot][r][n] = 1'b0;
        end
      kk++;
      wait_strobe();
    end
    kk = 0;
  endtask

  initial begin
    #200000;
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) begin
      bypass_en[r] = (r != 0);
      for (int n = 0; n < NN; n++) begin x[r][n] = '0; in_valid[r][n] = 1'b0; end
    end
    for (int s = 0; s < 16; s++) tbl[s] = '0;
    repeat (2) @(posedge clk);
    #0.5 rst_n = 1'b1;
    load_gelu();
    // A: router 0 registered
    @(negedge clk);
    wait_strobe();
    repeat (12) base_cycle();
    drain();
    // B: all routers bypassed
    for (int r = 0; r < NR; r++) bypass_en[r] = 1'b1;
    tail_quiet = 3;
    repeat (8) base_cycle();
    drain();
    // C: 8 breakpoints, steep table
    load_steep();
    bp16 = 1'b0;
    tail_quiet = 3;
    @(negedge clk);
    repeat (8) base_cycle();
    drain();
    // D: back to 16 breakpoints, GeLU, router 0 registered
    load_gelu();
    bp16 = 1'b1;
    bypass_en[0] = 1'b0;
    tail_quiet = 3;
    @(negedge clk);
    wait_strobe();
    repeat (6) base_cycle();
    drain();

    checks++; if (max_err > 0.06) fail($sformatf("GeLU error %f", max_err));
    checks++; if (n_tag0 == 0) fail("no tag-0 flit");
    checks++; if (n_tag1 == 0) fail("no tag-1 flit");
    checks++; if (n_reg == 0)  fail("no registered hop");
    checks++; if (n_byp == 0)  fail("no bypass hop");
    checks++; if (n_bp16 == 0) fail("no 16-breakpoint cycle");
    checks++; if (n_bp8 == 0)  fail("no 8-breakpoint cycle");
    checks++; if (n_sat == 0)  fail("no saturation");
    checks++; if (n_idle == 0) fail("no idle neuron");
    $display("mechanisms: tag0 flits %0d, tag1 flits %0d, registered hops %0d, bypass hops %0d",
             n_tag0, n_tag1, n_reg, n_byp);
    $display("            bp16 cycles %0d, bp8 cycles %0d, saturated %0d, idle %0d",
             n_bp16, n_bp8, n_sat, n_idle);
    $display("GeLU: %0d results, max error %f", n_gelu, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
