// tb_nova_broadcast_src - self-checking test of the broadcast source.
//
// Loads 16 random slope/bias pairs and 16 breakpoints through the
// configuration port, then checks NoC cycle by NoC cycle:
//  - 16-breakpoint mode: base_en alternates 0,1; the flit's tag is 0 in the
//    first and 1 in the strobe cycle (inverted when lead_odd is set); slot i
//    of a tag-t flit holds pair 2*i + t;
//  - 8-breakpoint mode: base_en every cycle, tag 0, slot i holds pair i;
//  - the breakpoint outputs equal what was written;
//  - a rewrite of one pair shows up in the next flit that carries it.
module tb_nova_broadcast_src;
  import nova_pkg::*;

  logic      clk = 1'b0, rst_n = 1'b0;
  logic      cfg_we = 1'b0, bp16 = 1'b1, lead_odd = 1'b0;
  cfg_sel_e  cfg_sel = CFG_PAIR;
  lut_addr_t cfg_addr = '0;
  pair_t     cfg_wdata = '0;
  flit_t     flit_out;
  logic      base_en;
  word_t     breakpoints [MAX_BP];
  int        checks = 0, failures = 0;

  nova_broadcast_src dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata,
                          .bp16, .lead_odd, .flit_out, .base_en, .breakpoints);

  always #1 clk = ~clk;

  pair_t tbl [16];
  word_t bp  [16];

  task automatic write(cfg_sel_e sel, int a, pair_t d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = sel; cfg_addr = lut_addr_t'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(int cycles);
    logic last_en;
    last_en = 1'bx;
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      if (bp16) begin
        logic t;
        t = base_en ^ lead_odd;
        check(flit_out.tag === t, "tag");
        if (c > 0) check(base_en !== last_en, "base_en alternates");
        for (int i = 0; i < 8; i++)
          check(flit_out.pairs[i] === tbl[2*i + int'(t)], "pair slot bp16");
      end else begin
        check(base_en === 1'b1 && flit_out.tag === 1'b0, "bp8 strobe/tag");
        for (int i = 0; i < 8; i++)
          check(flit_out.pairs[i] === tbl[i], "pair slot bp8");
      end
      last_en = base_en;
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 16; s++) begin
      tbl[s] = pair_t'($urandom);
      bp[s]  = word_t'($urandom);
      write(CFG_PAIR, s, tbl[s]);
      write(CFG_BREAKPOINT, s, '{slope: word_t'($urandom), bias: bp[s]});
    end
    @(negedge clk);
    for (int s = 0; s < 16; s++) check(breakpoints[s] === bp[s], "breakpoint");
    run(20);
    lead_odd = 1'b1;
    run(20);
    tbl[5] = pair_t'($urandom);
    write(CFG_PAIR, 5, tbl[5]);
    run(10);
    bp16 = 1'b0;
    @(negedge clk);
    run(10);
    bp16 = 1'b1; lead_odd = 1'b0;
    run(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
