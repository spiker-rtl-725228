// tb_layer_cu: starts the layer control unit with random spike vectors
// (including empty ones) and checks the command stream it sends the
// neurons. It must contain every excitatory index in order with its spike
// bit, one cycle after the same index was on the weight-memory address;
// then every inhibitory index; then exactly one fire command, with one
// out_valid pulse per step. A silent step must take one cycle and leave
// the unit ready. A step with spikes must take
// 2 + N_EXC*any_exc + N_INH*any_inh cycles. Half of the steps start back to
// back, the other half after a pause in which `quiet` must rise.
module tb_layer_cu;
  import spiker_pkg::*;
  localparam int NE = 8, NI = 5, NSTEPS = 300;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NE-1:0] exc_spikes = '0;
  logic [NI-1:0] inh_spikes = '0;
  logic ready, quiet, rd_en, cmd_spike, out_valid, exc_run, inh_run, skipped;
  logic [2:0] rd_addr;
  logic [2:0] cmd_idx;
  neuron_cmd_e cmd;
  int checks = 0, failures = 0;
  int n_skip = 0, n_exc = 0, n_inh = 0, n_valid = 0, n_b2b = 0;
  int ne_seen, ni_seen, nf_seen, last_addr;
  bit ok_order;
  logic [NE-1:0] e;
  logic [NI-1:0] h;

  always #5 clk = ~clk;

  layer_cu #(.N_EXC(NE), .N_INH(NI)) dut (
    .clk, .rst_n, .start, .exc_spikes, .inh_spikes, .ready, .quiet, .rd_en, .rd_addr,
    .cmd, .cmd_spike, .cmd_idx, .out_valid,
    .exc_phase_run(exc_run), .inh_phase_run(inh_run), .step_skipped(skipped)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // called once per cycle, just after the edge
  task automatic observe();
    if (cmd == CMD_EXC) begin
      if (int'(cmd_idx) != ne_seen || cmd_spike != e[ne_seen] || last_addr != ne_seen) ok_order = 0;
      ne_seen++;
    end else if (cmd == CMD_INH) begin
      if (int'(cmd_idx) != ni_seen || cmd_spike != h[ni_seen] || ne_seen != ((e != 0) ? NE : 0)) ok_order = 0;
      ni_seen++;
    end else if (cmd == CMD_FIRE) begin
      nf_seen++;
    end
    last_addr = rd_en ? int'(rd_addr) : -1;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) n_valid++;

  initial begin
    int cycles, expected;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int s = 0; s < NSTEPS; s++) begin
      e = (s % 4 == 0) ? '0 : NE'($urandom);
      h = (s % 3 == 0) ? '0 : NI'($urandom);
      if (s % 7 == 0) e = '0;
      check(ready, "ready before start");
      start = 1; exc_spikes = e; inh_spikes = h;   // driven 1 time unit after an edge
      @(posedge clk); #1;
      start = 0; exc_spikes = ~e; inh_spikes = ~h;   // must not matter after sampling
      cycles = 1; ne_seen = 0; ni_seen = 0; nf_seen = 0; ok_order = 1;
      observe();
      while (!ready) begin
        @(posedge clk); #1;
        cycles++;
        observe();
      end
      expected = (e == 0 && h == 0) ? 1 : 2 + ((e != 0) ? NE : 0) + ((h != 0) ? NI : 0);
      check(ok_order, $sformatf("step %0d command order", s));
      check(ne_seen == ((e != 0) ? NE : 0), $sformatf("step %0d exc cmds %0d", s, ne_seen));
      check(ni_seen == ((h != 0) ? NI : 0), $sformatf("step %0d inh cmds %0d", s, ni_seen));
      check(nf_seen == 1 && cmd == CMD_FIRE, "fire is the last command of the step");
      check(!quiet, "not quiet while the fire executes");
      check(cycles == expected, $sformatf("step %0d took %0d cycles, expected %0d", s, cycles, expected));
      if (e == 0 && h == 0) n_skip++;
      if (e != 0) n_exc++;
      if (h != 0) n_inh++;
      if ($urandom_range(0, 1) == 0) begin
        @(posedge clk); #1;
        check(quiet && cmd == CMD_NONE, "quiet after the fire");
      end else n_b2b++;
    end
    repeat (3) @(posedge clk);
    check(n_valid == NSTEPS, $sformatf("out_valid pulses %0d", n_valid));
    check(n_skip > 0 && n_exc > 0 && n_inh > 0 && n_b2b > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the skip/phase pulses agree with the sampled vectors
  always @(posedge clk) if (rst_n && start && ready) begin
    checks++;
    if (skipped != (exc_spikes == 0 && inh_spikes == 0) || exc_run != (exc_spikes != 0) || inh_run != (inh_spikes != 0)) begin
      failures++; $display("FAIL: phase flags");
    end
  end
endmodule
