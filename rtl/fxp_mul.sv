// fxp_mul: registered signed multiplier, the multiply stage (S3) of every ALU.
//
// Multiplies two signed W-bit fixed-point operands into a full 2W-bit product (for the (4,8)
// configuration the product is (8,16)) and registers it, so one product leaves per clock when
// `in_valid` is high every cycle. Latency is one clock. The parameter RES carries the
// ALU_resource_type meta-parameter: it places a vendor `use_dsp` attribute on the product so that
// an FPGA flow maps the multiply to a DSP slice (ALU_DSP) or to LUT logic (ALU_LUT). The
// arithmetic is identical in both cases; the attribute name is this design's choice.
module fxp_mul
  import lstm_pkg::*;
#(
  parameter int unsigned W   = DATA_W,
  parameter alu_res_e    RES = ALU_DSP
) (
  input  logic                  clk,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   a,
  input  logic signed [W-1:0]   b,
  output logic signed [2*W-1:0] p
);

  if (RES == ALU_DSP) begin : g_dsp
    (* use_dsp = "yes" *) logic signed [2*W-1:0] prod;
    always_ff @(posedge clk) if (in_valid) prod <= a * b;
    assign p = prod;
  end else begin : g_lut
    (* use_dsp = "no" *) logic signed [2*W-1:0] prod;
    always_ff @(posedge clk) if (in_valid) prod <= a * b;
    assign p = prod;
  end

endmodule
