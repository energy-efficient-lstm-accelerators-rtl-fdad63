// hard_sigmoid: the HardSigmoid* activation, a piecewise-linear stand-in for the sigmoid.
//
//   y = 0                         for x < -3
//   y = 1                         for x >= 3
//   y = (x >>> SLOPE_SHIFT) + 0.5  otherwise (slope 2^-SLOPE_SHIFT, 1/8 by default)
//
// A slope of 1/8 replaces PyTorch's 1/6 because it is a plain arithmetic shift in (4,8) fixed
// point. Three interchangeable implementations are selected by METHOD and give bit-identical
// results; they differ only in the logic an FPGA tool builds:
//   HS_ARITH  shift, then add 0.5 (two dependent steps), plus the two range comparators
//   HS_1TO1   a table with one entry per input code of the linear range (96 entries for (4,8))
//   HS_STEP   a chain of comparators, one per output level: adjacent inputs with the same output
//             are merged, using that the function is monotonic (14 entries for (4,8))
// Both tables are computed at elaboration from the formula above, for any (FRAC, W).
// Purely combinational. The linear range is taken as -3 <= x < 3 so that (4,8) has exactly 96
// linear entries, the count the 1to1 table is stated to hold; whether x = -3 itself maps to 0 or
// to 1/8 is otherwise left open.
module hard_sigmoid
  import lstm_pkg::*;
#(
  parameter int unsigned W           = DATA_W,
  parameter int unsigned FRAC        = FRAC_W,
  parameter int unsigned SLOPE_SHIFT = 3,
  parameter hs_method_e  METHOD      = HS_STEP
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);

  localparam int NCODES = 2 ** W;
  localparam int MINV   = -(2 ** (W - 1));
  localparam int MAXV   = 2 ** (W - 1) - 1;
  localparam int ONE    = 2 ** FRAC;
  localparam int HALF   = ONE / 2;
  // Linear range [LO, HI) in raw codes, clipped to what W bits can hold.
  localparam int LO     = (-3 * ONE < MINV) ? MINV : -3 * ONE;
  localparam int HI     = (3 * ONE > MAXV + 1) ? MAXV + 1 : 3 * ONE;
  localparam int NLIN   = HI - LO;

  // Reference formula on raw integer codes.
  function automatic int hs(input int v);
    if (v < -3 * ONE) return 0;
    if (v >= 3 * ONE) return ONE;
    return (v >>> SLOPE_SHIFT) + HALF;
  endfunction

  // 1to1 table: entry k holds hs(LO + k).
  function automatic logic [NCODES*W-1:0] build_1to1();
    logic [NCODES*W-1:0] t;
    t = '0;
    for (int k = 0; k < NLIN; k++) t[k*W +: W] = W'(hs(LO + k));
    return t;
  endfunction

  // Step table: for each output level above the lowest, the first input code reaching it.
  function automatic int count_steps();
    int n;
    n = 1;
    for (int v = MINV + 1; v <= MAXV; v++) if (hs(v) != hs(v - 1)) n++;
    return n;
  endfunction

  function automatic logic [NCODES*W-1:0] build_step_thr();
    logic [NCODES*W-1:0] t;
    int n;
    t = '0;
    n = 0;
    for (int v = MINV + 1; v <= MAXV; v++)
      if (hs(v) != hs(v - 1)) begin
        t[n*W +: W] = W'(v);
        n++;
      end
    return t;
  endfunction

  function automatic logic [NCODES*W-1:0] build_step_val();
    logic [NCODES*W-1:0] t;
    int n;
    t = '0;
    n = 0;
    for (int v = MINV + 1; v <= MAXV; v++)
      if (hs(v) != hs(v - 1)) begin
        t[n*W +: W] = W'(hs(v));
        n++;
      end
    return t;
  endfunction

  // Number of entries of the step method (including the lowest level).
  localparam int N_STEPS = count_steps();

  if (METHOD == HS_ARITH) begin : g_arith
    always_comb begin
      if (int'(x) < LO)       y = '0;
      else if (int'(x) >= HI) y = W'(ONE);
      else                    y = (x >>> SLOPE_SHIFT) + W'(HALF);
    end
  end else if (METHOD == HS_1TO1) begin : g_1to1
    localparam logic [NCODES*W-1:0] TABLE = build_1to1();
    logic [W-1:0] off;
    assign off = W'(int'(x) - LO);
    always_comb begin
      if (int'(x) < LO)       y = '0;
      else if (int'(x) >= HI) y = W'(ONE);
      else                    y = TABLE[off*W +: W];
    end
  end else begin : g_step
    localparam logic [NCODES*W-1:0] THR = build_step_thr();
    localparam logic [NCODES*W-1:0] VAL = build_step_val();
    always_comb begin
      y = W'(hs(MINV));
      for (int k = 0; k < N_STEPS - 1; k++)
        if (x >= $signed(THR[k*W +: W])) y = VAL[k*W +: W];
    end
  end

endmodule
