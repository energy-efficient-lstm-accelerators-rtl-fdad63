// tb_hard_tanh: exhaustive test of HardTanh with the default thresholds (+-1.0 in (4,8)) and
// with an asymmetric pair (+2.5, -0.5), over every 8-bit input code.
module tb_hard_tanh;
  logic signed [7:0] x, y1, y2;
  int checks = 0, failures = 0;

  hard_tanh dut1 (.x(x), .y(y1));
  hard_tanh #(.MAX_VAL(40), .MIN_VAL(-8)) dut2 (.x(x), .y(y2));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int c = -128; c < 128; c++) begin
      x = 8'(c);
      #1;
      check($sformatf("default x=%0d", c), int'(y1), (c > 16) ? 16 : (c < -16) ? -16 : c);
      check($sformatf("custom x=%0d", c),  int'(y2), (c > 40) ? 40 : (c < -8) ? -8 : c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
