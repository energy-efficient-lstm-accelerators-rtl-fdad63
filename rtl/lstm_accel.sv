// lstm_accel: the complete LSTM model accelerator, an LSTM layer followed by a dense layer.
//
// The network controller runs one inference: after `start` it lets the LSTM layer process the
// input sequence x_0 .. x_{seq_len-1} (each INPUT_SIZE values) from the on-chip input buffer,
// then lets the dense layer map the final hidden state h_t (HIDDEN_SIZE values) to the outputs
// y (OUT_FEATURES values). `done` pulses when y is valid; y holds until the next inference.
//
// All weights, biases and the input sequence live in on-chip memories and are written through
// one host port: wr_sel names the memory (lstm_pkg::param_sel_e), wr_addr the word.
//   SEL_WI/WF/WG/WO  gate weights, address k*(HIDDEN_SIZE+INPUT_SIZE) + j
//   SEL_BI/BF/BG/BO  gate biases, address k
//   SEL_DW, SEL_DB   dense weights (address p*IN_FEATURES + j) and biases (address p)
//   SEL_X            input sequence, address t*INPUT_SIZE + m
// All numbers are (FRAC, W) fixed point, (4,8) by default. The meta-parameters of the
// architecture are the parameters below: HIDDEN_SIZE, INPUT_SIZE, LSTM_ALU_RES and DENSE_ALU_RES
// (ALU_resource_type, set per layer so DSP slices can be kept for one layer only),
// W_RES (weight_resource_type), HS_METHOD (HardSigmoid* method), HT_MAX/HT_MIN
// (HardTanh_threshold), IN_FEATURES and OUT_FEATURES. IN_FEATURES must equal HIDDEN_SIZE.
// Timing: `done` rises seq_len*(HIDDEN_SIZE*(HIDDEN_SIZE+INPUT_SIZE+6)+6) + OUT_FEATURES*(IN_FEATURES+6)
// + 3 clock edges after the edge that samples `start` (5489 for the defaults and seq_len = 10). The host port, the input buffer (SEQ_MAX elements) and the
// run-time sequence length are this design's choices.
module lstm_accel
  import lstm_pkg::*;
#(
  parameter int unsigned HIDDEN_SIZE  = 20,
  parameter int unsigned INPUT_SIZE   = 1,
  parameter int unsigned IN_FEATURES  = 20,
  parameter int unsigned OUT_FEATURES = 1,
  parameter int unsigned SEQ_MAX      = 16,
  parameter int unsigned W            = DATA_W,
  parameter int unsigned FRAC         = FRAC_W,
  parameter alu_res_e    LSTM_ALU_RES  = ALU_DSP,   // the seven ALUs of the LSTM cell
  parameter alu_res_e    DENSE_ALU_RES = ALU_DSP,   // the ALU of the dense layer
  parameter mem_res_e    W_RES        = MEM_AUTO,
  parameter hs_method_e  HS_METHOD    = HS_STEP,
  parameter int          HT_MAX       = 2 ** FRAC,
  parameter int          HT_MIN       = -(2 ** FRAC),
  localparam int unsigned L_ADDR_W    = $clog2(HIDDEN_SIZE * (HIDDEN_SIZE + INPUT_SIZE)),
  localparam int unsigned D_ADDR_W    = (IN_FEATURES * OUT_FEATURES > 1) ? $clog2(IN_FEATURES * OUT_FEATURES) : 1,
  localparam int unsigned X_ADDR_W    = (SEQ_MAX * INPUT_SIZE > 1) ? $clog2(SEQ_MAX * INPUT_SIZE) : 1,
  localparam int unsigned ADDR_W      = (L_ADDR_W > D_ADDR_W) ? ((L_ADDR_W > X_ADDR_W) ? L_ADDR_W : X_ADDR_W)
                                                              : ((D_ADDR_W > X_ADDR_W) ? D_ADDR_W : X_ADDR_W),
  localparam int unsigned SEQ_W       = $clog2(SEQ_MAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host parameter and input port
  input  logic                wr_en,
  input  param_sel_e          wr_sel,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [W-1:0]        wr_data,
  // inference control
  input  logic                start,
  input  logic [SEQ_W-1:0]    seq_len,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] y [OUT_FEATURES]
);

  localparam int unsigned HIDX_W = (HIDDEN_SIZE > 1) ? $clog2(HIDDEN_SIZE) : 1;

  typedef enum logic [1:0] {N_IDLE, N_LSTM, N_DENSE_START, N_DENSE} nstate_e;
  nstate_e state;

  // Input sequence buffer.
  logic signed [W-1:0] x_buf [SEQ_MAX * INPUT_SIZE];
  logic signed [W-1:0] x_t   [INPUT_SIZE];
  logic [SEQ_W-1:0]    t_idx;

  always_ff @(posedge clk) begin
    if (wr_en && wr_sel == SEL_X) x_buf[X_ADDR_W'(wr_addr)] <= wr_data;
  end

  always_comb begin
    for (int m = 0; m < INPUT_SIZE; m++) x_t[m] = x_buf[int'(t_idx) * INPUT_SIZE + m];
  end

  logic                lstm_busy, lstm_done, dense_busy, dense_done;
  logic                h_re;
  logic [HIDX_W-1:0]   h_raddr;
  logic signed [W-1:0] h_rdata;

  lstm_layer #(
    .HIDDEN(HIDDEN_SIZE), .INPUT(INPUT_SIZE), .SEQ_MAX(SEQ_MAX), .W(W), .FRAC(FRAC),
    .ALU_RES(LSTM_ALU_RES), .W_RES(W_RES), .HS_METHOD(HS_METHOD), .HT_MAX(HT_MAX), .HT_MIN(HT_MIN)
  ) u_lstm (
    .clk(clk), .rst_n(rst_n),
    .wr_en(wr_en && wr_sel <= SEL_BO), .wr_sel(wr_sel), .wr_addr(L_ADDR_W'(wr_addr)), .wr_data(wr_data),
    .start(state == N_IDLE && start), .seq_len(seq_len), .t_idx(t_idx), .x_t(x_t),
    .busy(lstm_busy), .done(lstm_done),
    .h_re(h_re), .h_raddr(h_raddr), .h_rdata(h_rdata)
  );

  dense_layer #(
    .IN_FEATURES(IN_FEATURES), .OUT_FEATURES(OUT_FEATURES), .W(W), .FRAC(FRAC),
    .ALU_RES(DENSE_ALU_RES), .W_RES(W_RES)
  ) u_dense (
    .clk(clk), .rst_n(rst_n),
    .wr_en(wr_en), .wr_sel(wr_sel), .wr_addr(D_ADDR_W'(wr_addr)), .wr_data(wr_data),
    .start(state == N_DENSE_START), .busy(dense_busy), .done(dense_done),
    .h_re(h_re), .h_raddr(h_raddr), .h_rdata(h_rdata), .y(y)
  );

  // Network control.
  assign busy = (state != N_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= N_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        N_IDLE:        if (start) state <= N_LSTM;
        N_LSTM:        if (lstm_done) state <= N_DENSE_START;
        N_DENSE_START: state <= N_DENSE;
        N_DENSE:       if (dense_done) begin
          done  <= 1'b1;
          state <= N_IDLE;
        end
        default:       state <= N_IDLE;
      endcase
    end
  end

  initial assert (IN_FEATURES == HIDDEN_SIZE) else $error("IN_FEATURES must equal HIDDEN_SIZE");
  a_dense_idle: assert property (@(posedge clk) disable iff (!rst_n) state == N_DENSE_START |-> !dense_busy && !lstm_busy);
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wr_en);

endmodule
