// hard_tanh: the HardTanh activation, a clamp to [MIN_VAL, MAX_VAL].
//
//   y = MAX_VAL if x > MAX_VAL,  MIN_VAL if x < MIN_VAL,  x otherwise.
//
// The linear part has slope 1, so the function is two signed comparators and a multiplexer and
// loses no precision against a floating-point HardTanh as long as both thresholds are
// representable. MAX_VAL and MIN_VAL are raw fixed-point codes (the HardTanh_threshold
// meta-parameter); the defaults are +1.0 and -1.0 in (4,8). Purely combinational.
module hard_tanh
  import lstm_pkg::*;
#(
  parameter int unsigned W       = DATA_W,
  parameter int unsigned FRAC    = FRAC_W,
  parameter int          MAX_VAL = 2 ** FRAC,
  parameter int          MIN_VAL = -(2 ** FRAC)
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);

  localparam logic signed [W-1:0] HI = W'(MAX_VAL);
  localparam logic signed [W-1:0] LO = W'(MIN_VAL);

  always_comb begin
    if (x > HI)      y = HI;
    else if (x < LO) y = LO;
    else             y = x;
  end

endmodule
