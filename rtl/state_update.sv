// state_update: the element-wise cell-state and hidden-state update of the LSTM cell.
//
//   C_t[k] = f[k] * C_{t-1}[k] + i[k] * g[k]
//   h_t[k] = o[k] * HardTanh(C_t[k])
//
// Three multipliers (the cell's three state-update ALUs) work as a 4-stage pipeline that accepts
// one hidden unit per clock:
//   U1  f*C_{t-1} and i*g, each a full 2W-bit product
//   U2  the two products are added at full precision, rounded once and saturated to C_t
//   U3  C_t goes out on `c_to_act`, HardTanh(C_t) comes back on `c_tanh`, o*HardTanh(C_t)
//   U4  the product is rounded and saturated to h_t; `out_valid` pulses with c_new, h_new, out_idx
// Latency is 4 clocks from `in_valid` to `out_valid`. The unit index `in_idx` travels with the
// data so the caller can write C_t and h_t back. Performing the rounding after the sum, and
// half-up rounding with saturation, are this design's choices.
module state_update
  import lstm_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned FRAC  = FRAC_W,
  parameter int unsigned IDX_W = 8,
  parameter alu_res_e    RES   = ALU_DSP
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [IDX_W-1:0]    in_idx,
  input  logic signed [W-1:0] i_act,
  input  logic signed [W-1:0] f_act,
  input  logic signed [W-1:0] g_act,
  input  logic signed [W-1:0] o_act,
  input  logic signed [W-1:0] c_prev,
  output logic signed [W-1:0] c_to_act,   // C_t towards the HardTanh of the activation stage
  input  logic signed [W-1:0] c_tanh,     // HardTanh(C_t) from the activation stage
  output logic                out_valid,
  output logic [IDX_W-1:0]    out_idx,
  output logic signed [W-1:0] c_new,
  output logic signed [W-1:0] h_new
);

  logic                  v1, v2, v3;
  logic [IDX_W-1:0]      idx1, idx2, idx3;
  logic signed [W-1:0]   o1, o2, c3;
  logic signed [2*W-1:0] p_fc, p_ig, p_oh;
  logic signed [W-1:0]   c2;

  // U1: two multipliers.
  fxp_mul #(.W(W), .RES(RES)) u_mul_fc (.clk(clk), .in_valid(in_valid), .a(f_act), .b(c_prev), .p(p_fc));
  fxp_mul #(.W(W), .RES(RES)) u_mul_ig (.clk(clk), .in_valid(in_valid), .a(i_act), .b(g_act),  .p(p_ig));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {v1, v2, v3, out_valid} <= '0;
    end else begin
      v1        <= in_valid;
      v2        <= v1;
      v3        <= v2;
      out_valid <= v3;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      idx1 <= in_idx;
      o1   <= o_act;
    end
    // U2: add, round, saturate.
    if (v1) begin
      idx2 <= idx1;
      o2   <= o1;
      c2   <= W'(round_sat(64'(p_fc) + 64'(p_ig), FRAC, W));
    end
    if (v2) begin
      idx3 <= idx2;
      c3   <= c2;
    end
    // U4: round h_t.
    if (v3) begin
      out_idx <= idx3;
      c_new   <= c3;
      h_new   <= W'(round_sat(64'(p_oh), FRAC, W));
    end
  end

  // U3: o * HardTanh(C_t).
  assign c_to_act = c2;
  fxp_mul #(.W(W), .RES(RES)) u_mul_oh (.clk(clk), .in_valid(v2), .a(o2), .b(c_tanh), .p(p_oh));

endmodule
