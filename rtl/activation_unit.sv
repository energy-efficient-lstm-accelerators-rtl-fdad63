// activation_unit: the activation stage of the LSTM cell.
//
// Applies HardSigmoid* to the input, forget and output gate pre-activations and HardTanh to the
// candidate g. A second HardTanh serves the state update, which sends the new cell state C_t
// here and gets HardTanh(C_t) back for h_t = o_t * HardTanh(C_t). All paths are combinational;
// the registers around them belong to the gate ALUs and the state update. Using separate
// function instances per gate (rather than one shared, time-multiplexed instance) is this
// design's choice: the four gates finish in the same cycle.
module activation_unit
  import lstm_pkg::*;
#(
  parameter int unsigned W         = DATA_W,
  parameter int unsigned FRAC      = FRAC_W,
  parameter hs_method_e  HS_METHOD = HS_STEP,
  parameter int          HT_MAX    = 2 ** FRAC,
  parameter int          HT_MIN    = -(2 ** FRAC)
) (
  input  logic signed [W-1:0] pre_i,
  input  logic signed [W-1:0] pre_f,
  input  logic signed [W-1:0] pre_g,
  input  logic signed [W-1:0] pre_o,
  input  logic signed [W-1:0] c_in,    // C_t from the state update
  output logic signed [W-1:0] i_act,
  output logic signed [W-1:0] f_act,
  output logic signed [W-1:0] g_act,
  output logic signed [W-1:0] o_act,
  output logic signed [W-1:0] c_tanh   // HardTanh(C_t) back to the state update
);

  hard_sigmoid #(.W(W), .FRAC(FRAC), .METHOD(HS_METHOD)) u_hs_i (.x(pre_i), .y(i_act));
  hard_sigmoid #(.W(W), .FRAC(FRAC), .METHOD(HS_METHOD)) u_hs_f (.x(pre_f), .y(f_act));
  hard_sigmoid #(.W(W), .FRAC(FRAC), .METHOD(HS_METHOD)) u_hs_o (.x(pre_o), .y(o_act));
  hard_tanh #(.W(W), .FRAC(FRAC), .MAX_VAL(HT_MAX), .MIN_VAL(HT_MIN)) u_ht_g (.x(pre_g), .y(g_act));
  hard_tanh #(.W(W), .FRAC(FRAC), .MAX_VAL(HT_MAX), .MIN_VAL(HT_MIN)) u_ht_c (.x(c_in),  .y(c_tanh));

endmodule
