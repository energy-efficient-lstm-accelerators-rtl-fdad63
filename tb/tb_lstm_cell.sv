// tb_lstm_cell: runs the LSTM cell (default size: 20 hidden units, 1 input) for several time
// steps on random weights, biases and inputs and compares every h_t[k] with a reference LSTM
// step computed here with the same fixed-point rules (HardSigmoid* slope 1/8, HardTanh +-1,
// rounding after each inner product and after each state product). C_t is checked through its
// effect on later steps. Also checks `clear` (h_0 = C_0 = 0) and the step time
// HIDDEN*(HIDDEN+INPUT+6)+4 clock edges from the edge sampling `start` to the one raising `done`.
module tb_lstm_cell;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int K = 20, M = 1, N = K + M;
  localparam int AW = $clog2(K * N), HW = $clog2(K);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, clear, start, busy, done, h_re;
  param_sel_e wr_sel;
  logic [AW-1:0] wr_addr;
  logic [7:0] wr_data;
  logic signed [7:0] x_t [M];
  logic [HW-1:0] h_raddr;
  logic signed [7:0] h_rdata;

  lstm_cell dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .clear, .start, .x_t, .busy, .done,
    .h_re, .h_raddr, .h_rdata
  );

  int wt [4][K][N];   // gate order i, f, g, o
  int bs [4][K];
  int h_ref [K], c_ref [K];
  int checks = 0, failures = 0;
  int sat_hs = 0, sat_ht = 0, nonzero = 0;

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

  task automatic ref_step(input int x [M]);
    int hn [K];
    for (int k = 0; k < K; k++) begin
      int pre [4], a [4], c;
      for (int g = 0; g < 4; g++) begin
        longint s = longint'(bs[g][k]) * 16;
        for (int j = 0; j < K; j++) s += longint'(wt[g][k][j]) * h_ref[j];
        for (int m = 0; m < M; m++) s += longint'(wt[g][k][K + m]) * x[m];
        pre[g] = rnd(s);
      end
      a[0] = hsig(pre[0]); a[1] = hsig(pre[1]); a[2] = htanh(pre[2]); a[3] = hsig(pre[3]);
      if (pre[0] < -48 || pre[0] >= 48) sat_hs++;
      if (pre[2] > 16 || pre[2] < -16) sat_ht++;
      c = rnd(longint'(a[1]) * c_ref[k] + longint'(a[0]) * a[2]);
      c_ref[k] = c;
      hn[k] = rnd(longint'(a[3]) * htanh(c));
    end
    h_ref = hn;
  endtask

  task automatic run_step(input int x [M], input int t);
    int edges;
    for (int m = 0; m < M; m++) x_t[m] = 8'(x[m]);
    ref_step(x);
    @(negedge clk); start = 1;
    @(posedge clk); #1 start = 0;
    edges = 0;
    while (!done) begin @(posedge clk); #1 edges++; end
    check($sformatf("step time t=%0d", t), edges, K * (N + 6) + 4);
    for (int k = 0; k < K; k++) begin
      @(negedge clk); h_re = 1; h_raddr = HW'(k);
      @(negedge clk); h_re = 0;
      check($sformatf("h t=%0d k=%0d", t, k), int'(h_rdata), h_ref[k]);
      if (h_ref[k] != 0) nonzero++;
    end
  endtask

  initial begin
    int x [M];
    wr_en = 0; wr_sel = SEL_WI; wr_addr = 0; wr_data = 0; clear = 0; start = 0; h_re = 0; h_raddr = 0;
    x_t[0] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < K; k++) begin
        for (int j = 0; j < N; j++) begin
          wt[g][k][j] = rand_code(12);
          write(param_sel_e'(int'(SEL_WI) + g), k * N + j, wt[g][k][j]);
        end
        bs[g][k] = rand_code(24);
        write(param_sel_e'(int'(SEL_BI) + g), k, bs[g][k]);
      end
    for (int seq = 0; seq < 2; seq++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int k = 0; k < K; k++) begin h_ref[k] = 0; c_ref[k] = 0; end
      for (int t = 0; t < 6; t++) begin
        x[0] = rand_code((seq != 0) ? 127 : 20);
        run_step(x, t);
      end
    end
    // Make sure the saturating paths of the activations were exercised.
    checks++;
    if (sat_hs == 0 || sat_ht == 0 || nonzero < 100) begin failures++; $display("FAIL activations never saturated or h mostly zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
