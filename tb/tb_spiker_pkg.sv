// tb_spiker_pkg: checks the shared package on its own.
//
// * LFSR tap table: for every width from 3 to 16, an LFSR stepped with the
//   table's taps must come back to its seed after exactly 2^w - 1 steps and
//   never reach zero, which is what "maximal length" means. The 24- and
//   32-bit entries, too long to cycle, are compared with the tap positions
//   of the standard tables. Unsupported widths must return 0.
// * Fixed-point constants: V_reset, V_th0 and w_inh must be 5.0, 13.0 and
//   -15.0 scaled by 2^V_FRAC; weights and potentials must share the binary
//   point; the counter must hold N_STEPS; the input count must be 28 x 28.
// * clog2_min1 against a count of the bits needed, for 1..5000.
module tb_spiker_pkg;
  import spiker_pkg::*;

  logic clk = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Period of the LFSR of the given width, started from 1; stops early on
  // the all-zero state or after 2^w steps.
  function automatic longint period(input int unsigned w, output bit hit_zero);
    logic [31:0] taps, mask, s;
    longint n;
    taps = lfsr_taps(w);
    mask = (w == 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 1);
    s = 32'd1;
    n = 0;
    hit_zero = 0;
    do begin
      s = ((s << 1) | 32'(^(s & taps))) & mask;
      n++;
      if (s == 0) hit_zero = 1;
    end while (s != 32'd1 && !hit_zero && n <= (longint'(1) << w));
    return n;
  endfunction

  function automatic logic [31:0] taps_from(input int p0, input int p1, input int p2, input int p3);
    logic [31:0] t = '0;
    t[p0-1] = 1'b1; t[p1-1] = 1'b1;
    if (p2 > 0) t[p2-1] = 1'b1;
    if (p3 > 0) t[p3-1] = 1'b1;
    return t;
  endfunction

  initial begin
    bit z;
    longint p;
    int unsigned bits;
    repeat (2) @(posedge clk);

    for (int unsigned w = 3; w <= 16; w++) begin
      p = period(w, z);
      check(!z, $sformatf("width %0d LFSR reaches zero", w));
      check(p == (longint'(1) << w) - 1, $sformatf("width %0d period %0d, expected %0d", w, p, (longint'(1) << w) - 1));
      check(lfsr_taps(w)[w-1] && (lfsr_taps(w) >> w) == 0, $sformatf("width %0d top tap", w));
      @(posedge clk);
    end
    check(lfsr_taps(24) == taps_from(24, 23, 22, 17), "24-bit taps 24,23,22,17");
    check(lfsr_taps(32) == taps_from(32, 22, 2, 1), "32-bit taps 32,22,2,1");
    for (int unsigned w = 0; w <= 40; w++)
      if (!(w inside {[3:16], 24, 32})) check(lfsr_taps(w) == 0, $sformatf("width %0d unsupported", w));

    check(V_RESET == 16'sd5 * (16'sd1 <<< V_FRAC), "V_reset is 5.0");
    check(V_TH0 == 16'sd13 * (16'sd1 <<< V_FRAC), "V_th0 is 13.0");
    check(W_INH == -16'sd15 * (16'sd1 <<< V_FRAC), "w_inh is -15.0");
    check(W_FRAC == V_FRAC, "weights and potentials share the binary point");
    check(W_W == 5 && V_W == 16, "5-bit weights, 16-bit potentials");
    check((1 << CNT_W) > N_STEPS, "counter holds N_STEPS spikes");
    check(N_INPUTS == 28 * 28 && N_NEURONS == 400 && N_STEPS == 3500, "network size");
    check(LFSR_W >= PIXEL_W && lfsr_taps(LFSR_W) != 0, "LFSR width usable");
    check(DECAY_SHIFT == 10, "dt/tau = 2^-10");
    check($bits(neuron_cmd_e) == 2 && CMD_NONE == 0, "command encoding");

    for (int unsigned n = 1; n <= 5000; n++) begin
      bits = 1;
      while ((longint'(1) << bits) < longint'(n)) bits++;
      check(clog2_min1(n) == bits, $sformatf("clog2_min1(%0d) = %0d, expected %0d", n, clog2_min1(n), bits));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
