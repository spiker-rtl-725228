// tb_neuron: drives random command sequences into one neuron and compares
// the membrane potential and the spike output with an independent integer
// model of the LIF update: saturating add, fire-and-reset or
// V - floor(V / 2^10) leak, RESET V, and threshold loading.
module tb_neuron;
  import spiker_pkg::*;
  logic clk = 0, rst_n = 0;
  neuron_cmd_e cmd = CMD_NONE;
  logic spike_in = 0, rst_v = 0, thr_we = 0;
  logic signed [4:0]  weight = '0;
  logic signed [15:0] thr_data = '0;
  logic signed [15:0] v;
  logic spike_out, spike_now;
  int checks = 0, failures = 0;
  int fires = 0, leaks = 0, sats = 0;

  always #5 clk = ~clk;

  neuron dut (.clk, .rst_n, .cmd, .spike_in, .weight, .rst_v, .thr_we, .thr_data, .v, .spike_out, .spike_now);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat16(input int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  // floor division by 1024 for any sign (arithmetic shift semantics)
  function automatic int floordiv1024(input int x);
    int q = x / 1024;
    if ((x % 1024) != 0 && x < 0) q = q - 1;
    return q;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mv, mth, ms, w, r;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    mv = 0; mth = 104; ms = 0;
    check(v == 0 && spike_out == 0, "reset state");
    // A threshold exactly at V does not fire; one above it does.
    for (int n = 0; n < 12000; n++) begin
      r = $urandom_range(0, 99);
      cmd <= CMD_NONE; spike_in <= 0; rst_v <= 0; thr_we <= 0;
      w = $urandom_range(0, 31) - 16;
      weight <= 5'(w);
      if (r < 45) begin
        cmd <= CMD_EXC; spike_in <= ($urandom_range(0, 3) != 0);
      end else if (r < 65) begin
        cmd <= CMD_INH; spike_in <= ($urandom_range(0, 3) != 0);
      end else if (r < 80) begin
        cmd <= CMD_FIRE;
      end else if (r < 81) begin
        rst_v <= 1;
      end else if (r < 83) begin
        thr_we <= 1; thr_data <= 16'($urandom_range(0, 400) - 50);
      end
      #1;
      if (!rst_v) check(spike_now == ((cmd == CMD_FIRE) ? (mv > mth) : ms[0]),
                        $sformatf("step %0d spike_now=%0d", n, spike_now));
      @(posedge clk);
      // model
      if (rst_v) begin mv = 0; ms = 0; end
      else begin
        case (cmd)
          CMD_EXC: if (spike_in) begin
            if (mv + w > 32767 || mv + w < -32768) sats++;
            mv = sat16(mv + w);
          end
          CMD_INH: if (spike_in) begin
            if (mv - 120 < -32768) sats++;
            mv = sat16(mv - 120);
          end
          CMD_FIRE: if (mv > mth) begin mv = 40; ms = 1; fires++; end
                    else begin mv = mv - floordiv1024(mv); ms = 0; leaks++; end
          default: ;
        endcase
      end
      if (thr_we) mth = int'(thr_data);
      #1;
      check(int'(v) == mv && int'(spike_out) == ms,
            $sformatf("step %0d cmd %s: v=%0d exp %0d spike=%0d exp %0d", n, cmd.name(), v, mv, spike_out, ms));
    end
    // directed: long leak decays towards 0
    rst_v <= 1; @(posedge clk); rst_v <= 0;
    thr_we <= 1; thr_data <= 16'sd30000; @(posedge clk); thr_we <= 0;
    cmd <= CMD_EXC; spike_in <= 1; weight <= 5'sd15;
    repeat (1000) @(posedge clk);
    cmd <= CMD_NONE; #1;
    check(v == 16'sd15000, $sformatf("15000 after 1000 adds, got %0d", v));
    cmd <= CMD_FIRE; @(posedge clk); cmd <= CMD_NONE; #1;
    check(v == 16'sd15000 - 16'sd14, $sformatf("one leak of 15000 -> 14986, got %0d", v));
    // directed: heavy inhibition saturates at the most negative value
    rst_v <= 1; @(posedge clk); rst_v <= 0;
    cmd <= CMD_INH; spike_in <= 1;
    repeat (300) @(posedge clk);
    cmd <= CMD_NONE; #1;
    check(v == -16'sd32768, $sformatf("inhibition saturates, got %0d", v));
    if (v == -16'sd32768) sats++;
    cmd <= CMD_FIRE; @(posedge clk); cmd <= CMD_NONE; #1;
    check(v == -16'sd32736 && spike_out == 0, $sformatf("leak of -32768 -> -32736, got %0d", v));
    check(fires > 0 && leaks > 0 && sats > 0, $sformatf("coverage fires=%0d leaks=%0d sats=%0d", fires, leaks, sats));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
