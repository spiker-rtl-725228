// tb_output_counters: random increments into 8 small (4-bit) counters,
// checked against integer counts with saturation at 15, plus clear.
module tb_output_counters;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, clear = 0, inc_valid = 0;
  logic [N-1:0] inc = '0;
  logic [3:0] count [N];
  int model [N];
  int checks = 0, failures = 0, sat_seen = 0;

  always #5 clk = ~clk;

  output_counters #(.N(N), .CW(4)) dut (.clk, .rst_n, .clear, .inc_valid, .inc, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int j = 0; j < N; j++) begin model[j] = 0; check(count[j] == 0, "reset"); end
    for (int n = 0; n < 600; n++) begin
      inc_valid <= ($urandom_range(0, 2) != 0);
      inc <= N'($urandom) & N'($urandom | 8'h01);
      clear <= (n % 150 == 149);
      @(posedge clk); #1;
      for (int j = 0; j < N; j++) begin
        if (clear) model[j] = 0;
        else if (inc_valid && inc[j] && model[j] < 15) model[j]++;
        if (model[j] == 15) sat_seen++;
        check(int'(count[j]) == model[j], $sformatf("cycle %0d counter %0d = %0d exp %0d", n, j, count[j], model[j]));
      end
    end
    check(sat_seen > 0, "saturation reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
