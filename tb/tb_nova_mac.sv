// tb_nova_mac - self-checking test of the per-neuron multiply-add.
//
// Drives x with a base-clock strobe every second NoC cycle, presents the
// slope/bias one base cycle after x (as the router does) and checks y, sat
// and out_valid against a reference computed with integer arithmetic two
// base cycles after x was presented. Includes large values that saturate.
module tb_nova_mac;
  import nova_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, base_en = 1'b0;
  logic  in_valid = 1'b0;
  word_t x = '0, slope = '0, bias = '0;
  logic  out_valid, sat;
  word_t y;
  int    checks = 0, failures = 0, nsat = 0;

  nova_mac dut (.clk, .rst_n, .base_en, .in_valid, .x, .slope, .bias,
                .out_valid, .y, .sat);

  always #1 clk = ~clk;

  // history of inputs, indexed by base cycle
  word_t xs [0:255];
  word_t as [0:255];
  word_t bs [0:255];
  logic  vs [0:255];

  function automatic word_t ref_y(word_t xv, word_t av, word_t bv, output logic s);
    longint p = longint'(xv) * longint'(av);
    longint q = (p >= 0) ? (p / 256) : -((-p + 255) / 256);  // floor division
    longint r = q + longint'(bv);
    s = 1'b0;
    if (r > 32767)  begin s = 1'b1; return 16'sh7fff; end
    if (r < -32768) begin s = 1'b1; return 16'sh8000; end
    return word_t'(r);
  endfunction

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      xs[k] = (k % 7 == 3) ? word_t'(16'sh7f00) : word_t'($urandom);
      as[k] = (k % 11 == 5) ? word_t'(16'sh7000) : word_t'($urandom_range(0, 1023) - 512);
      bs[k] = word_t'($urandom);
      vs[k] = ($urandom_range(0, 3) != 0);
    end
    for (int k = 0; k < 204; k++) begin
      // base cycle k: phase 0 then phase 1 (strobe)
      @(negedge clk);
      base_en  = 1'b0;
      x        = (k < 200) ? xs[k] : '0;
      in_valid = (k < 200) ? vs[k] : 1'b0;
      slope    = (k >= 1 && k <= 200) ? as[k-1] : '0;
      bias     = (k >= 1 && k <= 200) ? bs[k-1] : '0;
      @(negedge clk);
      base_en = 1'b1;
      // during base cycle k the output shows the result of x from cycle k-2
      if (k >= 2 && k < 202) begin
        logic  es;
        word_t ey;
        ey = ref_y(xs[k-2], as[k-2], bs[k-2], es);
        checks++;
        if (out_valid !== vs[k-2] || (vs[k-2] && (y !== ey || sat !== es))) begin
          failures++;
          $display("FAIL k=%0d x=%0d a=%0d b=%0d y=%0d exp=%0d v=%0d sat=%0d", k-2,
                   xs[k-2], as[k-2], bs[k-2], y, ey, out_valid, sat);
        end
        if (vs[k-2] && es) nsat++;
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("saturated results: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
