// tb_lstm_accel: end-to-end test of the accelerator at its default size (20 hidden units,
// 1 input, 1 output, input buffer of 16 elements), with no parameter overridden.
//
// Loads random weights and biases for the LSTM and the dense layer through the host port,
// writes input sequences into the input buffer and runs inferences of lengths 16, 10, 1 and 16
// again. Each y is compared with a reference model of the whole network written here, and the
// inference time with seq_len*(K*(K+M+6)+6) + P*(K+6) + 3 clock edges from `start` to `done`.
// The test counts how often the data-dependent mechanisms occurred (HardSigmoid* clipped at 0
// and at 1, HardTanh clipped on g and on C_t, an inner product saturated by rounding, the state
// cleared between inferences with a non-zero state left behind) and fails if one never did.
module tb_lstm_accel;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int K = 20, M = 1, N = K + M, P = 1, SMAX = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, busy, done;
  param_sel_e wr_sel;
  logic [$clog2(K * N)-1:0] wr_addr;
  logic [7:0] wr_data;
  logic [$clog2(SMAX + 1)-1:0] seq_len;
  logic signed [7:0] y [P];

  lstm_accel dut (.clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .start, .seq_len, .busy, .done, .y);

  int wt [4][K][N], bs [4][K], dw [P][K], db [P], xs [SMAX][M];
  int h_ref [K], c_ref [K], y_ref [P];
  int checks = 0, failures = 0;
  int n_hs_low = 0, n_hs_high = 0, n_ht_g = 0, n_ht_c = 0, n_acc_sat = 0, n_clear = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write(input param_sel_e s, input int a, input int d);
    @(negedge clk);
    wr_en = 1; wr_sel = s; wr_addr = $bits(wr_addr)'(a); wr_data = 8'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic int count_pre(input longint s);
    int r;
    r = rnd(s);
    if ((s + 8) >>> 4 != longint'(r)) n_acc_sat++;
    return r;
  endfunction

  task automatic ref_infer(input int len);
    int nz;
    nz = 0;
    for (int k = 0; k < K; k++) if (h_ref[k] != 0 || c_ref[k] != 0) nz++;
    if (nz != 0) n_clear++;              // a previous state exists and must be discarded
    for (int k = 0; k < K; k++) begin h_ref[k] = 0; c_ref[k] = 0; end
    for (int t = 0; t < len; t++) begin
      int hn [K];
      for (int k = 0; k < K; k++) begin
        int pre [4], c;
        for (int g = 0; g < 4; g++) begin
          longint s;
          s = longint'(bs[g][k]) * 16;
          for (int j = 0; j < K; j++) s += longint'(wt[g][k][j]) * h_ref[j];
          for (int m = 0; m < M; m++) s += longint'(wt[g][k][K + m]) * xs[t][m];
          pre[g] = count_pre(s);
        end
        for (int g = 0; g < 4; g++) if (g != 2) begin
          if (pre[g] < -48) n_hs_low++;
          if (pre[g] >= 48) n_hs_high++;
        end
        if (pre[2] > 16 || pre[2] < -16) n_ht_g++;
        c = rnd(longint'(hsig(pre[1])) * c_ref[k] + longint'(hsig(pre[0])) * htanh(pre[2]));
        if (c > 16 || c < -16) n_ht_c++;
        c_ref[k] = c;
        hn[k] = rnd(longint'(hsig(pre[3])) * htanh(c));
      end
      h_ref = hn;
    end
    for (int p = 0; p < P; p++) begin
      longint s;
      s = longint'(db[p]) * 16;
      for (int j = 0; j < K; j++) s += longint'(dw[p][j]) * h_ref[j];
      y_ref[p] = count_pre(s);
    end
  endtask

  task automatic infer(input int len, input int xrange);
    int edges;
    for (int t = 0; t < SMAX; t++)
      for (int m = 0; m < M; m++) begin
        xs[t][m] = rand_code(xrange);
        write(SEL_X, t * M + m, xs[t][m]);
      end
    ref_infer(len);
    @(negedge clk); seq_len = $bits(seq_len)'(len); start = 1;
    @(posedge clk); #1 start = 0;
    edges = 0;
    while (!done) begin @(posedge clk); #1 edges++; end
    check($sformatf("inference time len=%0d", len), edges, len * (K * (N + 6) + 6) + P * (K + 6) + 3);
    for (int p = 0; p < P; p++) check($sformatf("y[%0d] len=%0d", p, len), int'(y[p]), y_ref[p]);
    $display("inference len=%0d: %0d cycles, y[0]=%0d (expected %0d)", len, edges, int'(y[0]), y_ref[0]);
  endtask

  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never occurred", name); end
  endtask

  initial begin
    wr_en = 0; wr_sel = SEL_WI; wr_addr = 0; wr_data = 0; start = 0; seq_len = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < K; k++) begin
        for (int j = 0; j < N; j++) begin
          wt[g][k][j] = rand_code(j == K ? 40 : 14);
          write(param_sel_e'(int'(SEL_WI) + g), k * N + j, wt[g][k][j]);
        end
        bs[g][k] = rand_code(40);
        write(param_sel_e'(int'(SEL_BI) + g), k, bs[g][k]);
      end
    for (int p = 0; p < P; p++) begin
      for (int j = 0; j < K; j++) begin
        dw[p][j] = rand_code(60);
        write(SEL_DW, p * K + j, dw[p][j]);
      end
      db[p] = rand_code(16);
      write(SEL_DB, p, db[p]);
    end
    for (int k = 0; k < K; k++) begin h_ref[k] = 0; c_ref[k] = 0; end
    infer(16, 24);
    infer(10, 127);
    infer(1, 24);
    // Large dense weights so that the output saturates.
    for (int j = 0; j < K; j++) begin
      dw[0][j] = (j % 2) ? 127 : 120;
      write(SEL_DW, j, dw[0][j]);
    end
    infer(16, 127);
    mech("HardSigmoid* clipped to 0", n_hs_low);
    mech("HardSigmoid* clipped to 1", n_hs_high);
    mech("HardTanh clipped on g", n_ht_g);
    mech("HardTanh clipped on C_t", n_ht_c);
    mech("inner product saturated", n_acc_sat);
    mech("state cleared between runs", n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
