// tb_layer: runs a small layer (8 inputs, 4 neurons) step by step against
// the reference model. After every step the membrane potentials and output
// spikes must match, the step must take the predicted number of cycles,
// and the excitatory phase, the inhibitory phase and the skipped step must
// each occur. The weight memory is a one-cycle-latency array in the
// testbench.
module tb_layer;
  import spiker_pkg::*;
  import spiker_ref_pkg::*;
  localparam int NI = 8, NN = 4;
  logic clk = 0, rst_n = 0, start = 0, rst_v = 0, thr_we = 0;
  logic ready, quiet, rd_en, out_valid, exc_run, inh_run, skipped;
  logic [NI-1:0] in_spikes = '0;
  logic [2:0] rd_addr;
  logic [NN*W_W-1:0] rd_row;
  logic [1:0] thr_addr = '0;
  logic signed [15:0] thr_data = '0;
  logic [NN-1:0] out_spikes;
  logic signed [15:0] v_mem [NN];
  logic [NN*W_W-1:0] wmem [NI];
  int checks = 0, failures = 0;
  layer_model m;

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (rd_en) rd_row <= wmem[rd_addr];

  layer #(.N_IN(NI), .N_N(NN)) dut (
    .clk, .rst_n, .start, .ready, .quiet, .in_spikes, .rd_en, .rd_addr, .rd_row, .rst_v,
    .thr_we, .thr_addr, .thr_data, .out_spikes, .out_valid, .v_mem,
    .exc_phase_run(exc_run), .inh_phase_run(inh_run), .step_skipped(skipped)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit sp[];
    int exp_c, cyc;
    bit ok;
    m = new(NI, NN);
    sp = new[NI];
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < NN; j++) begin
        m.w[i][j] = $urandom_range(0, 31) - 12;   // mostly excitatory
        if (m.w[i][j] > 15) m.w[i][j] = 15;
        wmem[i][j*W_W +: W_W] = 5'(m.w[i][j]);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // per-neuron thresholds
    for (int j = 0; j < NN; j++) begin
      m.thr[j] = 20 + 15 * j;
      thr_we <= 1; thr_addr <= 2'(j); thr_data <= 16'(m.thr[j]);
      @(posedge clk);
    end
    thr_we <= 0;
    for (int s = 0; s < 300; s++) begin
      logic [NI-1:0] vec;
      vec = (s % 5 == 0) ? '0 : NI'($urandom & $urandom);
      for (int i = 0; i < NI; i++) sp[i] = vec[i];
      exp_c = m.step(sp);
      #1;
      check(ready, "ready");
      start = 1; in_spikes = vec;      // driven 1 time unit after an edge
      @(posedge clk); #1;
      start = 0;
      cyc = 1;
      while (!ready) begin @(posedge clk); #1; cyc++; end
      check(cyc == exp_c, $sformatf("step %0d cycles %0d exp %0d", s, cyc, exp_c));
      check(!quiet, "fire still executing");
      @(posedge clk); #1;
      check(quiet, "quiet after the fire");
      ok = 1;
      for (int j = 0; j < NN; j++)
        if (int'(v_mem[j]) != m.v[j] || out_spikes[j] != m.s[j]) ok = 0;
      check(ok, $sformatf("step %0d state: v0=%0d exp %0d", s, v_mem[0], m.v[0]));
      if (s == 150) begin
        rst_v <= 1; @(posedge clk); rst_v <= 0; m.reset_v(); #1;
        check(v_mem[0] == 0 && v_mem[3] == 0 && out_spikes == 0, "RESET V");
      end
    end
    $display("exc steps %0d inh steps %0d skipped %0d fires %0d", m.exc_steps, m.inh_steps, m.skipped, m.fires);
    check(m.exc_steps > 0 && m.inh_steps > 0 && m.skipped > 0 && m.fires > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
