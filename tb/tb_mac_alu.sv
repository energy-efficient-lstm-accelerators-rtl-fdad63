// tb_mac_alu: self-checking test of the pipelined MAC ALU.
//
// Two behavioural memories with a registered read (the S2 load) feed the ALU. For a range of
// vector lengths, with random operands and bias, the test compares the rounded, saturated inner
// product with an integer reference computed here, and checks the pipeline timing: with
// `start` taken at the end of cycle 1, the result appears after cycle len+4 (12 cycles for the
// 8-iteration loop). It also runs two inner products back to back and large operands that
// saturate the output in both directions.
module tb_mac_alu;
  import lstm_pkg::*;

  localparam int W = 8, FRAC = 4, MAX_LEN = 32;
  localparam int LEN_W = $clog2(MAX_LEN + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, rd_en, out_valid;
  logic [LEN_W-1:0] len, idx;
  logic signed [W-1:0] bias, a_q, b_q, out;
  logic signed [W-1:0] amem [MAX_LEN], bmem [MAX_LEN];

  int checks = 0, failures = 0;

  mac_alu #(.W(W), .FRAC(FRAC), .MAX_LEN(MAX_LEN)) dut (
    .clk, .rst_n, .start, .len, .bias, .busy, .rd_en, .idx, .a_in(a_q), .b_in(b_q), .out, .out_valid
  );

  always_ff @(posedge clk) if (rd_en) begin
    a_q <= amem[idx];
    b_q <= bmem[idx];
  end

  function automatic int ref_dot(input int n, input int bv);
    int s, r;
    s = bv * 16;
    for (int j = 0; j < n; j++) s += int'(amem[j]) * int'(bmem[j]);
    r = (s + 8) >>> 4;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return r;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic fill(input int n, input int range);
    for (int j = 0; j < MAX_LEN; j++) begin
      amem[j] = W'($urandom_range(2 * range) - range);
      bmem[j] = W'($urandom_range(2 * range) - range);
    end
  endtask

  // Run one inner product, check value and cycle count.
  task automatic run(input int n, input int bv);
    int edges, exp;
    exp = ref_dot(n, bv);
    @(negedge clk);
    len = LEN_W'(n); bias = W'(bv); start = 1;
    @(posedge clk); #1 start = 0;
    edges = 0;
    while (!out_valid) begin
      @(posedge clk); #1 edges++;
    end
    check($sformatf("dot len=%0d", n), int'(out), exp);
    check($sformatf("latency len=%0d", n), edges + 1, n + 4);
  endtask

  initial begin
    start = 0; len = 1; bias = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Fig. 2 case: eight iterations finish in 12 cycles.
    fill(8, 40);
    run(8, 5);
    for (int it = 0; it < 40; it++) begin
      int n;
      n = $urandom_range(MAX_LEN - 1) + 1;
      fill(n, (it % 2) ? 128 : 30);
      run(n, int'($urandom_range(255)) - 128);
    end
    // Saturation in both directions.
    for (int j = 0; j < MAX_LEN; j++) begin amem[j] = 8'sd127; bmem[j] = 8'sd127; end
    run(MAX_LEN, 0);
    check("positive saturation", int'(out), 127);
    for (int j = 0; j < MAX_LEN; j++) begin amem[j] = 8'sd127; bmem[j] = -8'sd128; end
    run(MAX_LEN, 0);
    check("negative saturation", int'(out), -128);
    // Back-to-back: a new start in the cycle the result is valid.
    fill(5, 60);
    begin
      int e1, e2;
      e1 = ref_dot(5, 3);
      @(negedge clk); len = 5; bias = 3; start = 1;
      @(posedge clk); #1 start = 0;
      while (!out_valid) @(negedge clk);
      check("first of pair", int'(out), e1);
      check("idle when valid", int'(busy), 0);
      start = 1; bias = -7;
      e2 = ref_dot(5, -7);
      @(posedge clk); #1 start = 0;
      while (!out_valid) @(negedge clk);
      check("second of pair", int'(out), e2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
