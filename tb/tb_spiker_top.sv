// tb_spiker_top: end-to-end test of the accelerator at reduced size
// (16 inputs, 5 neurons, 80 steps, 8-bit LFSR, two weight banks of 8 rows).
// Four images run back to back. A reference model built from the
// equations, with its own LFSR, predicts every step's output spikes and
// the final counts. The testbench checks both, and checks the latency of
// each image against the cycle formula. It counts each mechanism of the
// design and requires every one to occur: skipped steps (also back to
// back, one per clock), excitatory and
// inhibitory phases, fires, a fire decision forwarded into the next step's
// inhibitory sampling, reads from both weight banks, per-neuron
// threshold loading and RESET V between images.
module tb_spiker_top;
  import spiker_pkg::*;
  import spiker_ref_pkg::*;
  localparam int NI = 16, NN = 5, STEPS = 80, BD = 8, RW = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, out_valid, exc_run, inh_run, skipped;
  logic [6:0] step;
  logic pix_we = 0, w_we = 0, thr_we = 0;
  logic [3:0] pix_addr = '0, w_addr = '0;
  logic [7:0] pix_data = '0;
  logic [NN*W_W-1:0] w_data = '0;
  logic [2:0] thr_addr = '0;
  logic signed [15:0] thr_data = '0;
  logic [CNT_W-1:0] counts [NN];
  logic [NN-1:0] out_spikes;
  int checks = 0, failures = 0;
  int n_skip = 0, n_exc = 0, n_inh = 0, n_fire = 0, n_bank1 = 0, n_thr = 0, n_rstv = 0;
  int n_b2b_skip = 0, n_fwd = 0;
  logic prev_skipped = 0;
  layer_model m;
  bit exp_spikes [$][];

  always #5 clk = ~clk;

  spiker_top #(.N_IN(NI), .N_N(NN), .STEPS(STEPS), .BANK_DEPTH(BD), .RAND_W(RW), .SEED(8'h01)) dut (
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters and per-step spike comparison
  always @(posedge clk) if (rst_n) begin
    if (skipped) n_skip++;
    if (skipped && prev_skipped) n_b2b_skip++;       // silent steps at one per clock
    prev_skipped <= skipped;
    // a step sampled while the previous fire decision is still executing,
    // with a neuron firing: the forwarded spike_now is what inhibits
    if (dut.layer_start && dut.u_layer.cmd == CMD_FIRE && dut.u_layer.spike_now != dut.out_spikes) n_fwd++;
    if (exc_run) n_exc++;
    if (inh_run) n_inh++;
    if (dut.u_wmem.rd_en && dut.u_wmem.rd_bank == 1'b1) n_bank1++;
    if (dut.rst_v) n_rstv++;
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
      if (!ok) begin failures++; $display("FAIL: output spikes %b at step %0d", out_spikes, step); end
    end
  end

  initial begin
    int r, c_exp, c_meas;
    logic [7:0] pix [NI];
    bit sp[];
    m = new(NI, NN);
    sp = new[NI];
    r = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // weights: neuron j prefers inputs with i % NN == j
    for (int i = 0; i < NI; i++) begin
      logic [NN*W_W-1:0] row;
      for (int j = 0; j < NN; j++) begin
        m.w[i][j] = (i % NN == j) ? 15 : $urandom_range(0, 8) - 4;
        row[j*W_W +: W_W] = 5'(m.w[i][j]);
      end
      w_we <= 1; w_addr <= 4'(i); w_data <= row;
      @(posedge clk);
    end
    w_we <= 0;
    // thresholds: neuron 4 keeps the default, the others are loaded
    for (int j = 0; j < NN - 1; j++) begin
      m.thr[j] = 40 + 30 * j;
      thr_we <= 1; thr_addr <= 3'(j); thr_data <= 16'(m.thr[j]);
      @(posedge clk);
      n_thr++;
    end
    thr_we <= 0;
    for (int img = 0; img < 4; img++) begin
      for (int i = 0; i < NI; i++) begin
        pix[i] = 8'($urandom_range(0, 200));
        pix_we <= 1; pix_addr <= 4'(i); pix_data <= pix[i];
        @(posedge clk);
      end
      pix_we <= 0;
      // predict the whole image
      m.clear_counts();
      c_exp = 0;
      for (int s = 0; s < STEPS; s++) begin
        for (int i = 0; i < NI; i++) sp[i] = (r < int'(pix[i]));
        c_exp += m.step(sp);
        exp_spikes.push_back(m.s);
        r = lfsr_next(r, RW);
      end
      m.reset_v();
      c_exp += 7;   // start, clear, first generation, last fire, drain, RESET V, done
      @(posedge clk);
      start <= 1; @(posedge clk); start <= 0;
      c_meas = 1;
      while (!done) begin @(posedge clk); c_meas++; end
      #1;
      for (int j = 0; j < NN; j++)
        check(int'(counts[j]) == m.count[j], $sformatf("image %0d neuron %0d count %0d exp %0d", img, j, counts[j], m.count[j]));
      check(c_meas == c_exp, $sformatf("image %0d latency %0d cycles, expected %0d", img, c_meas, c_exp));
      check(exp_spikes.size() == 0, "every step produced output");
      $display("image %0d: %0d cycles, counts %0d %0d %0d %0d %0d", img, c_meas, counts[0], counts[1], counts[2], counts[3], counts[4]);
    end
    $display("mechanisms: skipped %0d (back-to-back %0d) exc %0d inh %0d fires %0d forwarded %0d bank1 reads %0d thr loads %0d resetV %0d",
             n_skip, n_b2b_skip, n_exc, n_inh, n_fire, n_fwd, n_bank1, n_thr, n_rstv);
    check(n_skip > 0, "skipped step seen");
    check(n_b2b_skip > 0, "back-to-back silent steps seen");
    check(n_fwd > 0, "fire forwarded into the next step's sampling");
    check(n_exc > 0, "excitatory phase seen");
    check(n_inh > 0, "inhibitory phase seen");
    check(n_fire > 0, "fire seen");
    check(n_bank1 > 0, "second weight bank read");
    check(n_thr > 0, "threshold loaded");
    check(n_rstv == 4, "RESET V once per image");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
