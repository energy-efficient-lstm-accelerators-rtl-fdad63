// lstm_pkg: types and fixed-point helpers shared by the LSTM accelerator.
//
// Numbers are two's-complement fixed point written (FRAC, WIDTH): FRAC fractional bits in a
// WIDTH-bit word. The standard configuration is (4,8), so one LSB is 1/16 and the range is
// [-8, 7.9375]. The enums select the implementation options of the architecture's
// meta-parameters (ALU resource, weight memory resource, HardSigmoid* method). The helper
// functions are the one place where rounding and saturation are defined; rounding is
// round-half-up (add half an LSB, then arithmetic shift), a choice of this design.
package lstm_pkg;

  // Implementation resource of a multiplier (meta-parameter ALU_resource_type).
  typedef enum logic [0:0] {ALU_DSP = 1'b0, ALU_LUT = 1'b1} alu_res_e;

  // Resource of a weight matrix (meta-parameter weight_resource_type).
  typedef enum logic [1:0] {MEM_AUTO = 2'd0, MEM_LUTRAM = 2'd1, MEM_BRAM = 2'd2} mem_res_e;

  // HardSigmoid* implementation method (meta-parameter HardSigmoid*_method).
  typedef enum logic [1:0] {HS_ARITH = 2'd0, HS_1TO1 = 2'd1, HS_STEP = 2'd2} hs_method_e;

  // Selects which parameter memory a host write goes to.
  typedef enum logic [3:0] {
    SEL_WI = 4'd0, SEL_WF = 4'd1, SEL_WG = 4'd2, SEL_WO = 4'd3,   // LSTM gate weight matrices
    SEL_BI = 4'd4, SEL_BF = 4'd5, SEL_BG = 4'd6, SEL_BO = 4'd7,   // LSTM gate biases
    SEL_DW = 4'd8, SEL_DB = 4'd9,                                 // dense layer W and B
    SEL_X  = 4'd10                                                // input sequence buffer
  } param_sel_e;

  // Default fixed-point configuration (4,8).
  localparam int unsigned DATA_W = 8;
  localparam int unsigned FRAC_W = 4;

  // Drop `frac` fractional bits of v, rounding half-up, and saturate the result to a signed
  // w-bit range. Used to bring a product or a sum with 2*FRAC fractional bits back to
  // (FRAC, WIDTH). At most 64-bit inputs are handled.
  function automatic logic signed [63:0] round_sat(input logic signed [63:0] v,
                                                   input int unsigned frac,
                                                   input int unsigned w);
    logic signed [63:0] r, hi, lo;
    r  = (frac == 0) ? v : ((v + (64'sd1 <<< (frac - 1))) >>> frac);
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (r > hi) r = hi;
    else if (r < lo) r = lo;
    return r;
  endfunction

endpackage
