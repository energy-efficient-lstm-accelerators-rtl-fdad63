// tb_lstm_layer: runs the LSTM layer (6 hidden units, 2 inputs per element) over random input
// sequences of lengths 1 to 8 and compares the final hidden state with a reference LSTM
// unrolled over the sequence from h_0 = C_0 = 0. The testbench supplies x_t for the time step
// the layer names on t_idx. It checks that each run starts from a cleared state (the same
// sequence twice gives the same result) and the run time
// seq_len*(HIDDEN*(HIDDEN+INPUT+6)+6) clock edges from `start` to `done`.
module tb_lstm_layer;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int K = 6, M = 2, N = K + M, SMAX = 8;
  localparam int AW = $clog2(K * N), HW = $clog2(K), SW = $clog2(SMAX + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, busy, done, h_re;
  param_sel_e wr_sel;
  logic [AW-1:0] wr_addr;
  logic [7:0] wr_data;
  logic [SW-1:0] seq_len, t_idx;
  logic signed [7:0] x_t [M];
  logic [HW-1:0] h_raddr;
  logic signed [7:0] h_rdata;

  lstm_layer #(.HIDDEN(K), .INPUT(M), .SEQ_MAX(SMAX)) dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .start, .seq_len, .t_idx, .x_t,
    .busy, .done, .h_re, .h_raddr, .h_rdata
  );

  int wt [4][K][N];
  int bs [4][K];
  int xs [SMAX][M];
  int h_ref [K], c_ref [K];
  int checks = 0, failures = 0;

  // The surrounding logic: present the element the layer asks for.
  always_comb for (int m = 0; m < M; m++) x_t[m] = 8'(xs[t_idx][m]);

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

  task automatic ref_seq(input int len);
    for (int k = 0; k < K; k++) begin h_ref[k] = 0; c_ref[k] = 0; end
    for (int t = 0; t < len; t++) begin
      int hn [K];
      for (int k = 0; k < K; k++) begin
        int pre [4], c;
        for (int g = 0; g < 4; g++) begin
          longint s = longint'(bs[g][k]) * 16;
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
  endtask

  task automatic run_seq(input int len, input string tag);
    int edges;
    ref_seq(len);
    @(negedge clk); seq_len = SW'(len); start = 1;
    @(posedge clk); #1 start = 0;
    edges = 0;
    while (!done) begin @(posedge clk); #1 edges++; end
    check({tag, " run time"}, edges, len * (K * (N + 6) + 6));
    for (int k = 0; k < K; k++) begin
      @(negedge clk); h_re = 1; h_raddr = HW'(k);
      @(negedge clk); h_re = 0;
      check($sformatf("%s len=%0d h[%0d]", tag, len, k), int'(h_rdata), h_ref[k]);
    end
  endtask

  initial begin
    wr_en = 0; wr_sel = SEL_WI; wr_addr = 0; wr_data = 0; start = 0; seq_len = 1; h_re = 0; h_raddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < K; k++) begin
        for (int j = 0; j < N; j++) begin
          wt[g][k][j] = rand_code(20);
          write(param_sel_e'(int'(SEL_WI) + g), k * N + j, wt[g][k][j]);
        end
        bs[g][k] = rand_code(24);
        write(param_sel_e'(int'(SEL_BI) + g), k, bs[g][k]);
      end
    for (int len = 1; len <= SMAX; len++) begin
      for (int t = 0; t < SMAX; t++) for (int m = 0; m < M; m++) xs[t][m] = rand_code(40);
      run_seq(len, "first");
      run_seq(len, "repeat");
    end
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
