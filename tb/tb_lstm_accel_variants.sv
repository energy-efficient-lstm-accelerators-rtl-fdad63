// tb_lstm_accel_variants: the implementation options must not change the numbers.
//
// Three accelerators of a multi-input, multi-output size (8 hidden units, 3 inputs, 2 outputs,
// input buffer of 6) are built with different meta-parameters and receive the same weights,
// biases and inputs:
//   dut_a  HardSigmoid* step,       DSP multipliers,            AUTO memories
//   dut_b  HardSigmoid* arithmetic, LUT multipliers,            LUTRAM memories
//   dut_c  HardSigmoid* 1to1,       LUT cell / DSP dense layer, BRAM memories
// Every output of every instance is compared with a reference model of the network, and the
// inference time with seq_len*(K*(K+M+6)+6) + P*(K+6) + 3 clock edges.
module tb_lstm_accel_variants;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int K = 8, M = 3, N = K + M, P = 2, SMAX = 6;
  localparam int AW = $clog2(K * N), SW = $clog2(SMAX + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start;
  param_sel_e wr_sel;
  logic [AW-1:0] wr_addr;
  logic [7:0] wr_data;
  logic [SW-1:0] seq_len;
  logic [2:0] busy, done;
  logic signed [7:0] y [3][P];

  lstm_accel #(.HIDDEN_SIZE(K), .INPUT_SIZE(M), .IN_FEATURES(K), .OUT_FEATURES(P), .SEQ_MAX(SMAX),
               .HS_METHOD(HS_STEP), .LSTM_ALU_RES(ALU_DSP), .DENSE_ALU_RES(ALU_DSP), .W_RES(MEM_AUTO)) dut_a (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .start, .seq_len, .busy(busy[0]), .done(done[0]), .y(y[0]));
  lstm_accel #(.HIDDEN_SIZE(K), .INPUT_SIZE(M), .IN_FEATURES(K), .OUT_FEATURES(P), .SEQ_MAX(SMAX),
               .HS_METHOD(HS_ARITH), .LSTM_ALU_RES(ALU_LUT), .DENSE_ALU_RES(ALU_LUT), .W_RES(MEM_LUTRAM)) dut_b (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .start, .seq_len, .busy(busy[1]), .done(done[1]), .y(y[1]));
  lstm_accel #(.HIDDEN_SIZE(K), .INPUT_SIZE(M), .IN_FEATURES(K), .OUT_FEATURES(P), .SEQ_MAX(SMAX),
               .HS_METHOD(HS_1TO1), .LSTM_ALU_RES(ALU_LUT), .DENSE_ALU_RES(ALU_DSP), .W_RES(MEM_BRAM)) dut_c (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .start, .seq_len, .busy(busy[2]), .done(done[2]), .y(y[2]));

  int wt [4][K][N], bs [4][K], dw [P][K], db [P], xs [SMAX][M];
  int h_ref [K], c_ref [K], y_ref [P];
  int checks = 0, failures = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write(input param_sel_e s, input int a, input int d);
    @(negedge clk);
    wr_en = 1; wr_sel = s; wr_addr = AW'(a); wr_data = 8'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic ref_infer(input int len);
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
          pre[g] = rnd(s);
        end
        c = rnd(longint'(hsig(pre[1])) * c_ref[k] + longint'(hsig(pre[0])) * htanh(pre[2]));
        c_ref[k] = c;
        hn[k] = rnd(longint'(hsig(pre[3])) * htanh(c));
      end
      h_ref = hn;
    end
    for (int p = 0; p < P; p++) begin
      longint s;
      s = longint'(db[p]) * 16;
      for (int j = 0; j < K; j++) s += longint'(dw[p][j]) * h_ref[j];
      y_ref[p] = rnd(s);
    end
  endtask

  task automatic infer(input int len);
    int edges;
    for (int t = 0; t < SMAX; t++)
      for (int m = 0; m < M; m++) begin
        xs[t][m] = rand_code(64);
        write(SEL_X, t * M + m, xs[t][m]);
      end
    ref_infer(len);
    @(negedge clk); seq_len = SW'(len); start = 1;
    @(posedge clk); #1 start = 0;
    edges = 0;
    while (!done[0]) begin @(posedge clk); #1 edges++; end
    check($sformatf("inference time len=%0d", len), edges, len * (K * (N + 6) + 6) + P * (K + 6) + 3);
    check("all variants finish together", int'(done), 7);
    for (int v = 0; v < 3; v++)
      for (int p = 0; p < P; p++)
        check($sformatf("variant %0d y[%0d] len=%0d", v, p, len), int'(y[v][p]), y_ref[p]);
  endtask

  initial begin
    wr_en = 0; wr_sel = SEL_WI; wr_addr = 0; wr_data = 0; start = 0; seq_len = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < K; k++) begin
        for (int j = 0; j < N; j++) begin
          wt[g][k][j] = rand_code(24);
          write(param_sel_e'(int'(SEL_WI) + g), k * N + j, wt[g][k][j]);
        end
        bs[g][k] = rand_code(40);
        write(param_sel_e'(int'(SEL_BI) + g), k, bs[g][k]);
      end
    for (int p = 0; p < P; p++) begin
      for (int j = 0; j < K; j++) begin
        dw[p][j] = rand_code(48);
        write(SEL_DW, p * K + j, dw[p][j]);
      end
      db[p] = rand_code(16);
      write(SEL_DB, p, db[p]);
    end
    for (int len = 1; len <= SMAX; len++) infer(len);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
