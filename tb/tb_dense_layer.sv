// tb_dense_layer: loads random dense weights and biases for 20 inputs and 3 outputs, serves the
// hidden-state reads from a behavioural register with one clock of read latency, and checks
// every y[p] against y = rnd(16*B + W*h) as well as the run time OUT*(IN+6) clock edges from
// `start` to `done`. Large weights push some outputs into saturation.
module tb_dense_layer;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int K = 20, P = 3;
  localparam int AW = $clog2(K * P), HW = $clog2(K);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, busy, done, h_re;
  param_sel_e wr_sel;
  logic [AW-1:0] wr_addr;
  logic [7:0] wr_data;
  logic [HW-1:0] h_raddr;
  logic signed [7:0] h_rdata;
  logic signed [7:0] y [P];

  dense_layer #(.IN_FEATURES(K), .OUT_FEATURES(P)) dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .start, .busy, .done,
    .h_re, .h_raddr, .h_rdata, .y
  );

  int wt [P][K], bs [P], h [K];
  int checks = 0, failures = 0, saturated = 0;

  always_ff @(posedge clk) if (h_re) h_rdata <= 8'(h[h_raddr]);

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

  initial begin
    wr_en = 0; wr_sel = SEL_DW; wr_addr = 0; wr_data = 0; start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      int edges;
      for (int p = 0; p < P; p++) begin
        for (int j = 0; j < K; j++) begin
          wt[p][j] = rand_code(round < 3 ? 16 : 127);
          write(SEL_DW, p * K + j, wt[p][j]);
        end
        bs[p] = rand_code(64);
        write(SEL_DB, p, bs[p]);
      end
      for (int j = 0; j < K; j++) h[j] = rand_code(16);
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      edges = 0;
      while (!done) begin @(posedge clk); #1 edges++; end
      check("run time", edges, P * (K + 6));
      for (int p = 0; p < P; p++) begin
        longint s;
        int e;
        s = longint'(bs[p]) * 16;
        for (int j = 0; j < K; j++) s += longint'(wt[p][j]) * h[j];
        e = rnd(s);
        if (e == 127 || e == -128) saturated++;
        check($sformatf("y[%0d] round %0d", p, round), int'(y[p]), e);
      end
    end
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL saturation never reached"); end
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
