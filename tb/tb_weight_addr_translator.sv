// tb_weight_addr_translator: exhaustive check of the index -> (bank, row)
// mapping for the default 784-row, 512-deep configuration and for a small
// configuration whose depth is not a power of two.
module tb_weight_addr_translator;
  logic [9:0] idx_a;
  logic       bank_a;
  logic [8:0] row_a;
  logic       valid_a;
  logic [4:0] idx_b;
  logic [1:0] bank_b;
  logic [2:0] row_b;
  logic       valid_b;
  int checks = 0, failures = 0;

  weight_addr_translator dut_a (.index(idx_a), .bank(bank_a), .row(row_a), .valid(valid_a));
  weight_addr_translator #(.N_ROWS(20), .BANK_DEPTH(6)) dut_b (.index(idx_b), .bank(bank_b), .row(row_b), .valid(valid_b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int eb, er;
    for (int i = 0; i < 1024; i++) begin
      idx_a = 10'(i); #1;
      eb = (i >= 512) ? 1 : 0;
      er = i - 512 * eb;
      check(valid_a == (i < 784), $sformatf("valid %0d", i));
      if (i < 784) check(int'(bank_a) == eb && int'(row_a) == er, $sformatf("index %0d -> %0d/%0d", i, bank_a, row_a));
    end
    for (int i = 0; i < 32; i++) begin
      idx_b = 5'(i); #1;
      eb = 0; er = i;
      while (er >= 6) begin er -= 6; eb++; end
      check(valid_b == (i < 20), $sformatf("valid b %0d", i));
      if (i < 20) check(int'(bank_b) == eb && int'(row_b) == er, $sformatf("b index %0d -> %0d/%0d", i, bank_b, row_b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
