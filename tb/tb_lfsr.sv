// tb_lfsr: checks the LFSR against an independent bit-level model written
// from the published tap positions, and checks the maximal period
// (2^W - 1 states, never zero) for 8 bits and for the 15-bit default.
module tb_lfsr;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0]  v8;
  logic [14:0] v15;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lfsr #(.WIDTH(8), .SEED(8'h01)) dut8 (.clk, .rst_n, .en, .value(v8));
  lfsr dut15 (.clk, .rst_n, .en, .value(v15));

  function automatic logic [7:0] ref8(input logic [7:0] s);   // taps 8,6,5,4
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction
  function automatic logic [14:0] ref15(input logic [14:0] s); // taps 15,14
    return {s[13:0], s[14] ^ s[13]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0]  e8;
    logic [14:0] e15;
    int period8, period15;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(v8 == 8'h01 && v15 == 15'h0001, "seed after reset");
    // hold when en is low
    @(posedge clk);
    check(v8 == 8'h01, "hold without en");
    e8 = v8; e15 = v15; period8 = 0; period15 = 0;
    en <= 1;
    for (int n = 1; n <= 32767; n++) begin
      @(posedge clk); #1;
      e8  = ref8(e8);
      e15 = ref15(e15);
      if (n <= 300) check(v8 == e8, $sformatf("8-bit step %0d", n));
      if (n % 97 == 0) check(v15 == e15, $sformatf("15-bit step %0d", n));
      if (v8 == 8'h00 || v15 == 15'h0) check(0, "zero state");
      if (period8 == 0 && v8 == 8'h01) period8 = n;
      if (period15 == 0 && v15 == 15'h0001) period15 = n;
    end
    check(period8 == 255, $sformatf("8-bit period %0d", period8));
    check(period15 == 32767, $sformatf("15-bit period %0d", period15));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
