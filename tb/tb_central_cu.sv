// tb_central_cu: the central control unit with two model layers that stay
// busy for a random number of cycles after each start. Checks that a run
// starts exactly N_STEPS layer steps, never while a layer is busy; that
// spike generation happens once per step, first alone and then together
// with the previous step's start; that counters are cleared once at the
// beginning and RESET V is pulsed once, in the cycle after every layer has
// become quiet following the last step; and
// that `done` comes at the predicted cycle.
module tb_central_cu;
  localparam int STEPS = 6, NL = 2;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NL-1:0] ready, quiet;
  logic gen, gen_clear, layer_start, rst_v, cnt_clear, busy, done;
  logic [2:0] step;
  int busy_cnt [NL], lag [NL];
  int checks = 0, failures = 0;
  int n_start, n_gen, n_clear, n_rstv, n_done, cyc, last_ready_cyc, rstv_cyc, done_cyc;
  int gen_alone, gen_with_start;

  always #5 clk = ~clk;

  central_cu #(.N_STEPS_P(STEPS), .N_LAYERS(NL)) dut (
    .clk, .rst_n, .start, .layers_ready(ready), .layers_quiet(quiet), .gen, .gen_clear, .layer_start,
    .rst_v, .cnt_clear, .busy, .done, .step
  );

  for (genvar l = 0; l < NL; l++) begin : g_layer
    // a model layer: busy for 0..9 cycles (0 = a silent step, ready at
    // once), then quiet 1..2 cycles after it is ready
    assign ready[l] = (busy_cnt[l] == 0);
    assign quiet[l] = (busy_cnt[l] == 0) && (lag[l] == 0);
    always @(posedge clk) begin
      if (!rst_n) begin busy_cnt[l] <= 0; lag[l] <= 0; end
      else if (layer_start) begin busy_cnt[l] <= $urandom_range(0, 9); lag[l] <= $urandom_range(1, 2); end
      else if (busy_cnt[l] > 0) busy_cnt[l] <= busy_cnt[l] - 1;
      else if (lag[l] > 0) lag[l] <= lag[l] - 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (n_start == STEPS && !layer_start && quiet == '1 && last_ready_cyc == 0) last_ready_cyc = cyc;
    if (layer_start) begin
      n_start++;
      if (ready != '1) begin failures++; $display("FAIL: start while a layer is busy"); end
      checks++;
    end
    if (gen) begin n_gen++; if (layer_start) gen_with_start++; else gen_alone++; end
    if (cnt_clear) begin n_clear++; checks++; if (!gen_clear || n_start != 0) begin failures++; $display("FAIL: clear timing"); end end
    if (rst_v) begin n_rstv++; rstv_cyc = cyc; end
    if (done) begin n_done++; done_cyc = cyc; end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 3; run++) begin
      n_start = 0; n_gen = 0; n_clear = 0; n_rstv = 0; n_done = 0; cyc = 0;
      last_ready_cyc = 0; gen_alone = 0; gen_with_start = 0;
      @(posedge clk); #1;
      check(!busy, "idle before start");
      start = 1; @(posedge clk); #1; start = 0;
      check(busy, "busy after start");
      while (!done) @(posedge clk);
      @(posedge clk); #1;
      check(!busy, "idle after done");
      check(n_start == STEPS, $sformatf("layer starts %0d", n_start));
      check(n_gen == STEPS && gen_alone == 1 && gen_with_start == STEPS - 1,
            $sformatf("gen %0d alone %0d overlapped %0d", n_gen, gen_alone, gen_with_start));
      check(n_clear == 1, "one clear");
      check(n_rstv == 1 && rstv_cyc == last_ready_cyc + 1, $sformatf("rst_v at %0d, all quiet %0d", rstv_cyc, last_ready_cyc));
      check(n_done == 1 && done_cyc == rstv_cyc + 1, "done one cycle after rst_v");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
