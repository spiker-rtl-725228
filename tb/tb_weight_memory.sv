// tb_weight_memory: writes random rows into a small banked weight memory
// (20 rows, 3 neurons, banks of 8, last bank 4 deep), reads them back in
// random order and checks the data and the one-cycle read latency.
module tb_weight_memory;
  localparam int NR = 20, NN = 3, RW = NN * 5;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  logic [RW-1:0] wr_data = '0, rd_data;
  logic [RW-1:0] model [NR];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_memory #(.N_ROWS(NR), .N_N(NN), .BANK_DEPTH(8)) dut (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
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
    int a, prev;
    @(posedge clk);
    for (int i = 0; i < NR; i++) begin
      model[i] = RW'($urandom);
      wr_en <= 1; wr_addr <= 5'(i); wr_data <= model[i];
      @(posedge clk);
    end
    wr_en <= 0;
    prev = -1;
    for (int n = 0; n < 400; n++) begin
      a = $urandom_range(0, NR - 1);
      rd_en <= 1; rd_addr <= 5'(a);
      @(posedge clk); #1;
      check(rd_data == model[a], $sformatf("row %0d: %h exp %h", a, rd_data, model[a]));
      prev = a;
      // hold: no read for a cycle, data must stay
      rd_en <= 0; rd_addr <= 5'($urandom_range(0, NR - 1));
      @(posedge clk); #1;
      check(rd_data == model[a], "hold without rd_en");
      // overwrite a row now and then
      if (n % 25 == 0) begin
        a = $urandom_range(0, NR - 1);
        model[a] = RW'($urandom);
        wr_en <= 1; wr_addr <= 5'(a); wr_data <= model[a];
        @(posedge clk);
        wr_en <= 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
