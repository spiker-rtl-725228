// tb_spike_generator: rate-coding checks. Per step, input i must spike
// exactly when the shared random value r is below its intensity. Over one
// full LFSR period every non-zero r appears once, so input i must spike
// exactly pixel[i]-1 times (0 for pixel 0). Also checks the clear input.
module tb_spike_generator;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, gen = 0, clear = 0;
  logic [3:0] wr_addr = '0;
  logic [7:0] wr_data = '0;
  logic [N-1:0] spikes;
  logic [7:0] rnd;
  logic [7:0] pix [N];
  int count [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spike_generator #(.N_IN(N), .PIX_W(8), .RAND_W(8), .SEED(8'h5A)) dut (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .gen, .clear, .spikes, .rand_value(rnd)
  );

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
    logic [7:0] r;
    logic [N-1:0] exp_s;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      pix[i] = (i == 0) ? 8'd0 : (i == 1) ? 8'd255 : (i == 2) ? 8'd1 : 8'($urandom_range(0, 255));
      wr_en <= 1; wr_addr <= 4'(i); wr_data <= pix[i];
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
    check(spikes == '0, "no spikes before gen");
    for (int i = 0; i < N; i++) count[i] = 0;
    for (int s = 0; s < 255; s++) begin
      r = rnd;
      gen <= 1;
      @(posedge clk);
      gen <= 0;
      #1;
      for (int i = 0; i < N; i++) exp_s[i] = (r < pix[i]);
      check(spikes == exp_s, $sformatf("step %0d r=%0d spikes %h exp %h", s, r, spikes, exp_s));
      check(rnd != r, "lfsr advanced on gen");
      for (int i = 0; i < N; i++) count[i] += int'(spikes[i]);
      // hold for a cycle without gen
      @(posedge clk); #1;
      check(spikes == exp_s, "spikes hold without gen");
    end
    for (int i = 0; i < N; i++)
      check(count[i] == ((pix[i] == 0) ? 0 : int'(pix[i]) - 1),
            $sformatf("input %0d pixel %0d spiked %0d times", i, pix[i], count[i]));
    clear <= 1; @(posedge clk); clear <= 0; #1;
    check(spikes == '0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
