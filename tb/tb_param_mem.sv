// tb_param_mem: checks the parameter memory in its three resource variants: random words are
// written, read back with one clock of latency, and the read register must hold while `re` is
// low. A write and a read of the same word in one clock return the old word.
module tb_param_mem;
  import lstm_pkg::*;
  localparam int DEPTH = 420, AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [7:0] wdata, rd [3];
  logic [7:0] model [DEPTH];
  int checks = 0, failures = 0;

  param_mem #(.DEPTH(DEPTH), .RES(MEM_AUTO))   m0 (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata(rd[0]));
  param_mem #(.DEPTH(DEPTH), .RES(MEM_LUTRAM)) m1 (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata(rd[1]));
  param_mem #(.DEPTH(DEPTH), .RES(MEM_BRAM))   m2 (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata(rd[2]));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    logic [7:0] held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = 8'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 1000; n++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk); re = 1; raddr = AW'(a);
      @(negedge clk); re = 0;
      for (int v = 0; v < 3; v++) check($sformatf("read v%0d a=%0d", v, a), int'(rd[v]), int'(model[a]));
      held = model[a];
      raddr = AW'($urandom_range(DEPTH - 1));
      @(negedge clk);
      for (int v = 0; v < 3; v++) check("hold", int'(rd[v]), int'(held));
    end
    // read-during-write of the same word returns the old word
    @(negedge clk); we = 1; re = 1; waddr = 7; raddr = 7; held = model[7]; wdata = ~model[7]; model[7] = wdata;
    @(negedge clk); we = 0; re = 0;
    for (int v = 0; v < 3; v++) check("read during write", int'(rd[v]), int'(held));
    @(negedge clk); re = 1; raddr = 7;
    @(negedge clk); re = 0;
    for (int v = 0; v < 3; v++) check("after write", int'(rd[v]), int'(model[7]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
