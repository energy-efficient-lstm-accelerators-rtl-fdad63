// tb_hard_sigmoid: exhaustive test of the three HardSigmoid* implementations.
//
// Every input code is applied to the arithmetic, 1to1 and step variants in each of the three
// fixed-point configurations (4,8), (6,8) and (8,10); each output is compared with the formula
// y = 0 (x < -3), 1 (x >= 3), x/8 + 1/2 rounded toward minus infinity to one LSB otherwise. The
// test also counts the linear-range codes (96) and the distinct output levels (14) of (4,8).
module tb_hard_sigmoid;
  import lstm_pkg::*;

  logic signed [7:0] x, y_ar, y_11, y_st, y_ar6, y_116, y_st6;
  logic signed [9:0] x10, y_ar10, y_1110, y_st10;
  int checks = 0, failures = 0;

  hard_sigmoid #(.METHOD(HS_ARITH)) dut_ar (.x(x), .y(y_ar));
  hard_sigmoid #(.METHOD(HS_1TO1))  dut_11 (.x(x), .y(y_11));
  hard_sigmoid #(.METHOD(HS_STEP))  dut_st (.x(x), .y(y_st));
  hard_sigmoid #(.FRAC(6), .METHOD(HS_ARITH)) dut_ar6 (.x(x), .y(y_ar6));
  hard_sigmoid #(.FRAC(6), .METHOD(HS_1TO1))  dut_116 (.x(x), .y(y_116));
  hard_sigmoid #(.FRAC(6), .METHOD(HS_STEP))  dut_st6 (.x(x), .y(y_st6));
  hard_sigmoid #(.W(10), .FRAC(8), .METHOD(HS_ARITH)) dut_ar10 (.x(x10), .y(y_ar10));
  hard_sigmoid #(.W(10), .FRAC(8), .METHOD(HS_1TO1))  dut_1110 (.x(x10), .y(y_1110));
  hard_sigmoid #(.W(10), .FRAC(8), .METHOD(HS_STEP))  dut_st10 (.x(x10), .y(y_st10));

  // Reference on real numbers, quantised to `frac` bits by flooring.
  function automatic int ref_hs(input int code, input int frac);
    real v, r;
    v = real'(code) / real'(2 ** frac);
    if (v < -3.0) return 0;
    if (v >= 3.0) return 2 ** frac;
    r = v / 8.0 + 0.5;
    return int'($floor(r * real'(2 ** frac)));
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    x10 = 0;
  end

  initial begin
    int nlin, nlev, prev;
    nlin = 0; nlev = 1; prev = -1;
    for (int c = -128; c < 128; c++) begin
      int e;
      x = 8'(c);
      #1;
      e = ref_hs(c, 4);
      check($sformatf("arith x=%0d", c), int'(y_ar), e);
      check($sformatf("1to1 x=%0d", c),  int'(y_11), e);
      check($sformatf("step x=%0d", c),  int'(y_st), e);
      check($sformatf("arith(6,8) x=%0d", c), int'(y_ar6), ref_hs(c, 6));
      check($sformatf("1to1(6,8) x=%0d", c),  int'(y_116), ref_hs(c, 6));
      check($sformatf("step(6,8) x=%0d", c),  int'(y_st6), ref_hs(c, 6));
      if (c >= -48 && c < 48) nlin++;
      if (prev >= 0 && e != prev) nlev++;
      prev = e;
    end
    for (int c = -512; c < 512; c++) begin
      x10 = 10'(c);
      #1;
      check($sformatf("arith(8,10) x=%0d", c), int'(y_ar10), ref_hs(c, 8));
      check($sformatf("1to1(8,10) x=%0d", c),  int'(y_1110), ref_hs(c, 8));
      check($sformatf("step(8,10) x=%0d", c),  int'(y_st10), ref_hs(c, 8));
    end
    check("linear entries (4,8)", nlin, 96);
    check("step entries (4,8)", nlev, 14);
    check("step entries in RTL", dut_st.N_STEPS, 14);
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
