// tb_nova_comparator - self-checking test of the lookup-address comparator.
//
// Random ascending breakpoint sets, random x plus x exactly on and just
// below each breakpoint, in 16- and 8-breakpoint mode. The expected address
// is found by scanning from the top for the highest k >= 1 with x >= d[k]
// (0 if none), a different formulation from the design's count.
module tb_nova_comparator;
  import nova_pkg::*;

  word_t     x;
  word_t     bps [MAX_BP];
  logic      bp16;
  lut_addr_t addr;
  int        checks = 0, failures = 0;

  nova_comparator dut (.x(x), .breakpoints(bps), .bp16(bp16), .addr(addr));

  function automatic int ref_addr(word_t xv, int n);
    for (int k = n - 1; k >= 1; k--)
      if (xv >= bps[k]) return k;
    return 0;
  endfunction

  task automatic check_one(word_t xv);
    int exp_a;
    x = xv;
    #1;
    exp_a = ref_addr(xv, bp16 ? 16 : 8);
    checks++;
    if (int'(addr) != exp_a) begin
      failures++;
      $display("FAIL bp16=%0d x=%0d addr=%0d exp=%0d", bp16, xv, addr, exp_a);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int set = 0; set < 40; set++) begin
      // ascending breakpoints from -2048 upward in random steps
      int v;
      v = -2048 - int'($urandom_range(0, 4000));
      for (int k = 0; k < 16; k++) begin
        bps[k] = word_t'(v);
        v += 1 + int'($urandom_range(0, 400));
      end
      bp16 = set[0];
      for (int k = 0; k < 16; k++) begin
        check_one(bps[k]);
        check_one(bps[k] - 16'sd1);
      end
      for (int t = 0; t < 50; t++) check_one(word_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
