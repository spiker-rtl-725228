// tb_spiker_full: one complete MNIST-sized inference at the default
// configuration: 784 inputs, 400 neurons, 3500 steps and a 15-bit LFSR.
// The input is a synthetic 28x28 digit-like ring. Its intensity falls off
// with distance from a circle of radius 8: max(0, 255 - 70*|r - 8|). The
// weights come from a fixed formula that gives every neuron a different
// mix of positive and negative Q2.3 weights:
//   w[i][j] = ((i * 7 + j * 13 + (i / 28) * j) % 23) - 8, clipped to 15.
// A reference model built from the equations predicts every step's output
// spikes, the final counts and the latency. The testbench checks all three
// and prints the time per image at 100 MHz.
module tb_spiker_full;
  import spiker_pkg::*;
  import spiker_ref_pkg::*;
  localparam int NI = N_INPUTS, NN = N_NEURONS, STEPS = N_STEPS;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, out_valid, exc_run, inh_run, skipped;
  logic [11:0] step;
  logic pix_we = 0, w_we = 0, thr_we = 0;
  logic [9:0] pix_addr = '0, w_addr = '0;
  logic [7:0] pix_data = '0;
  logic [NN*W_W-1:0] w_data = '0;
  logic [8:0] thr_addr = '0;
  logic signed [15:0] thr_data = '0;
  logic [CNT_W-1:0] counts [NN];
  logic [NN-1:0] out_spikes;
  int checks = 0, failures = 0;
  int n_skip = 0, n_exc = 0, n_inh = 0, n_fire = 0;
  layer_model m;
  bit exp_spikes [$][];

  always #5 clk = ~clk;

  spiker_top dut (
    .clk, .rst_n, .start, .busy, .done, .step,
    .pix_we, .pix_addr, .pix_data, .w_we, .w_addr, .w_data, .thr_we, .thr_addr, .thr_data,
    .counts, .out_spikes, .out_valid,
    .exc_phase_run(exc_run), .inh_phase_run(inh_run), .step_skipped(skipped)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (skipped) n_skip++;
    if (exc_run) n_exc++;
    if (inh_run) n_inh++;
    if (out_valid) begin
      bit e[];
      bit ok = 1;
      if (exp_spikes.size() == 0) ok = 0;
      else begin
        e = exp_spikes.pop_front();
        for (int j = 0; j < NN; j++) if (out_spikes[j] != e[j]) ok = 0;
      end
      n_fire += $countones(out_spikes);
      checks++;
      if (!ok) begin failures++; $display("FAIL: output spikes at step %0d", step); end
    end
  end

  initial begin
    int r, c_exp, c_meas, best, best_j;
    logic [7:0] pix [NI];
    bit sp[];
    real d, dx, dy, p;
    m = new(NI, NN);
    sp = new[NI];
    r = 32'h5A5A;   // the top's default LFSR seed
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NI; i++) begin
      logic [NN*W_W-1:0] row;
      for (int j = 0; j < NN; j++) begin
        m.w[i][j] = ((i * 7 + j * 13 + (i / 28) * j) % 23) - 8;
        if (m.w[i][j] > 15) m.w[i][j] = 15;
        row[j*W_W +: W_W] = 5'(m.w[i][j]);
      end
      w_we <= 1; w_addr <= 10'(i); w_data <= row;
      @(posedge clk);
    end
    w_we <= 0;
    for (int i = 0; i < NI; i++) begin
      dx = real'(i % 28) - 13.5;
      dy = real'(i / 28) - 13.5;
      d = $sqrt(dx * dx + dy * dy) - 8.0;
      if (d < 0) d = -d;
      p = 255.0 - 70.0 * d;
      pix[i] = (p > 0.0) ? 8'(int'(p)) : 8'd0;
      pix_we <= 1; pix_addr <= 10'(i); pix_data <= pix[i];
      @(posedge clk);
    end
    pix_we <= 0;
    c_exp = 7;   // start, clear, first generation, last fire, drain, RESET V, done
    for (int s = 0; s < STEPS; s++) begin
      for (int i = 0; i < NI; i++) sp[i] = (r < int'(pix[i]));
      c_exp += m.step(sp);
      exp_spikes.push_back(m.s);
      r = lfsr_next(r, LFSR_W);
    end
    m.reset_v();
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    c_meas = 1;
    while (!done) begin @(posedge clk); c_meas++; end
    #1;
    best = -1; best_j = -1;
    for (int j = 0; j < NN; j++) begin
      check(int'(counts[j]) == m.count[j], $sformatf("neuron %0d count %0d exp %0d", j, counts[j], m.count[j]));
      if (int'(counts[j]) > best) begin best = int'(counts[j]); best_j = j; end
    end
    check(c_meas == c_exp, $sformatf("latency %0d cycles, expected %0d", c_meas, c_exp));
    check(exp_spikes.size() == 0, "every step produced output");
    check(dut.u_layer.v_mem[0] == 0 && dut.u_layer.v_mem[NN-1] == 0, "membranes back at rest");
    $display("image: %0d cycles = %0d us at 100 MHz; %0d excitatory phases, %0d inhibitory phases, %0d skipped steps, %0d output spikes; most active neuron %0d (%0d spikes)",
             c_meas, c_meas / 100, n_exc, n_inh, n_skip, n_fire, best_j, best);
    check(n_skip > 0 && n_exc > 0 && n_inh > 0 && n_fire > 0, "all mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
