// tb_state_update: streams random gate activations and old cell states through the state-update
// pipeline, one hidden unit per clock and with gaps, closing the HardTanh loop in the testbench.
// Checks C_t = rnd(f*C + i*g), h_t = rnd(o*HardTanh(C_t)), the unit index that travels with the
// data, and the 4-clock latency.
module tb_state_update;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [7:0] in_idx, out_idx;
  logic signed [7:0] ia, fa, ga, oa, cp, c_to_act, c_tanh, c_new, h_new;
  int checks = 0, failures = 0;

  state_update dut (
    .clk, .rst_n, .in_valid, .in_idx, .i_act(ia), .f_act(fa), .g_act(ga), .o_act(oa), .c_prev(cp),
    .c_to_act, .c_tanh, .out_valid, .out_idx, .c_new, .h_new
  );

  // HardTanh of the activation stage, modelled here.
  assign c_tanh = 8'(htanh(int'(c_to_act)));

  int exp_c [$], exp_h [$], exp_i [$], exp_t [$];
  int cycle = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      if (exp_c.size() == 0) begin
        checks++; failures++; $display("FAIL unexpected output");
      end else begin
        check("c_new", int'(c_new), exp_c.pop_front());
        check("h_new", int'(h_new), exp_h.pop_front());
        check("idx", int'(out_idx), exp_i.pop_front());
        check("latency", cycle - exp_t.pop_front(), 4);
      end
    end
  end

  initial begin
    int n_sent;
    in_valid = 0; in_idx = 0; ia = 0; fa = 0; ga = 0; oa = 0; cp = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n_sent = 0;
    while (n_sent < 500) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      // gate activations lie in [0,1] (i,f,o) and [-1,1] (g); C may be anywhere
      ia = 8'($urandom_range(16)); fa = 8'($urandom_range(16)); oa = 8'($urandom_range(16));
      ga = 8'(rand_code(16)); cp = 8'(rand_code(128));
      if (n_sent % 50 == 0) begin ia = 16; fa = 16; ga = 16; cp = 127; end  // C saturates
      in_idx = 8'(n_sent);
      if (in_valid) begin
        int c;
        c = rnd(longint'(fa) * cp + longint'(ia) * ga);
        exp_c.push_back(c);
        exp_h.push_back(rnd(longint'(oa) * htanh(c)));
        exp_i.push_back(n_sent % 256);
        exp_t.push_back(cycle);
        n_sent++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(posedge clk);
    check("all outputs seen", exp_c.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
