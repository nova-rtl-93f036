// tb_nova_router - self-checking test of one NOVA router.
//
// The testbench plays the broadcast source: every base cycle it invents a
// fresh table of 16 slope/bias pairs and sends it as two flits (tag 0: even
// segments, tag 1: odd segments), or as one flit in 8-breakpoint mode. Each
// neuron gets a random lookup address per base cycle. Checked:
//  - west_out equals east_in in the same NoC cycle with bypass_en = 1, and
//    the previous NoC cycle's east_in with bypass_en = 0 (the source then
//    sends its tags one cycle early);
//  - after each base-clock strobe, every neuron's slope/bias equal the table
//    entry of the address it presented in that base cycle.
module tb_nova_router;
  import nova_pkg::*;

  localparam int N = 8;

  logic      clk = 1'b0, rst_n = 1'b0, base_en = 1'b0, bp16 = 1'b1, bypass_en = 1'b1;
  flit_t     east_in = '0, west_out;
  lut_addr_t addr  [N];
  word_t     slope [N], bias [N];
  int        checks = 0, failures = 0;
  int        n_bypass = 0, n_reg = 0, n_bp8 = 0;

  nova_router #(.NEURONS(N)) dut (.clk, .rst_n, .base_en, .bp16, .bypass_en,
                                  .east_in, .west_out, .addr, .slope, .bias);

  always #1 clk = ~clk;

  pair_t     tbl  [16];
  lut_addr_t a_prev [N];
  pair_t     e_prev [N];
  flit_t     prev_in = '0;

  function automatic flit_t make_flit(logic tag, logic two);
    flit_t f;
    f.tag = two ? tag : 1'b0;
    for (int i = 0; i < 8; i++)
      f.pairs[i] = two ? tbl[2*i + int'(tag)] : tbl[i];
    return f;
  endfunction

  // One NoC cycle: drive at negedge, check west_out, then let the edge pass.
  task automatic noc_cycle(flit_t f, logic strobe);
    @(negedge clk);
    prev_in  = east_in;
    east_in  = f;
    base_en  = strobe;
    #0.1;
    checks++;
    if (west_out !== (bypass_en ? f : prev_in)) begin
      failures++;
      $display("FAIL west_out bypass=%0d", bypass_en);
    end
  endtask

  // New random table and addresses; expected pair per neuron.
  task automatic new_addrs(logic two, logic new_table);
    if (new_table) for (int s = 0; s < 16; s++) tbl[s] = pair_t'($urandom);
    for (int n = 0; n < N; n++) begin
      addr[n]   = lut_addr_t'($urandom_range(0, two ? 15 : 7));
      e_prev[n] = tbl[addr[n]];
    end
  endtask

  // Check right after the strobe edge.
  task automatic check_outputs(string what);
    @(posedge clk);
    #0.1;
    for (int n = 0; n < N; n++) begin
      checks++;
      if (slope[n] !== e_prev[n].slope || bias[n] !== e_prev[n].bias) begin
        failures++;
        $display("FAIL %s neuron %0d addr %0d slope %h exp %h bias %h exp %h", what, n,
                 addr[n], slope[n], e_prev[n].slope, bias[n], e_prev[n].bias);
      end
    end
  endtask

  initial begin
    #40000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) addr[n] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // 16 breakpoints, bypass path: tag 0 in phase 0, tag 1 at the strobe;
    // a fresh table every base cycle.
    bp16 = 1'b1; bypass_en = 1'b1;
    repeat (40) begin
      new_addrs(1'b1, 1'b1);
      noc_cycle(make_flit(1'b0, 1'b1), 1'b0);
      noc_cycle(make_flit(1'b1, 1'b1), 1'b1);
      check_outputs("bp16/bypass");
      n_bypass++;
    end
    // 16 breakpoints, registered path: the source sends tag 1 in phase 0
    // and tag 0 at the strobe, so the router sees them one cycle later in
    // the right order. The table stays fixed; the first base cycle after
    // the switch still holds a flit of the old table and is not checked.
    bypass_en = 1'b0;
    new_addrs(1'b1, 1'b1);
    noc_cycle(make_flit(1'b1, 1'b1), 1'b0);
    noc_cycle(make_flit(1'b0, 1'b1), 1'b1);
    repeat (40) begin
      new_addrs(1'b1, 1'b0);
      noc_cycle(make_flit(1'b1, 1'b1), 1'b0);
      noc_cycle(make_flit(1'b0, 1'b1), 1'b1);
      check_outputs("bp16/registered");
      n_reg++;
    end
    // 8 breakpoints: one flit per base cycle, strobe every NoC cycle
    bp16 = 1'b0; bypass_en = 1'b1;
    repeat (40) begin
      new_addrs(1'b0, 1'b1);
      noc_cycle(make_flit(1'b0, 1'b0), 1'b1);
      check_outputs("bp8");
      n_bp8++;
    end
    checks++;
    if (n_bypass == 0 || n_reg == 0 || n_bp8 == 0) failures++;
    $display("bypass cycles %0d registered %0d bp8 %0d", n_bypass, n_reg, n_bp8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
