// lstm_cell: one LSTM cell computing one time step for all HIDDEN hidden units.
//
// For each hidden unit k in turn, the four gate ALUs (input i, forget f, candidate g, output o)
// run in parallel, each taking the inner product of row k of its weight matrix with the
// concatenated vector [h_{t-1}, x_t] of length HIDDEN+INPUT, starting from its gate bias. The four
// pre-activations pass through the activation stage (HardSigmoid* for i, f, o; HardTanh for g)
// into the state-update pipeline, which writes C_t[k] and h_t[k] back. While unit k is in the
// state update, the ALUs already work on unit k+1.
//
// Storage: four weight memories (HIDDEN x (HIDDEN+INPUT) words each), four bias memories
// (HIDDEN words), the cell state C (HIDDEN registers, updated in place) and two banks of hidden
// state. One bank holds h_{t-1} and is read by the ALUs; h_t goes to the other bank; the banks
// swap when the step ends, because every unit of step t needs all of h_{t-1}.
//
// Interface: parameters are loaded through the wr_* port (wr_sel picks the memory, see
// lstm_pkg::param_sel_e; weight address = k*(HIDDEN+INPUT) + j, j < HIDDEN indexing h and
// j >= HIDDEN indexing x). `clear` sets h and C to zero (h_0 = C_0 = 0). `start` runs one step on
// the x_t held at the input; `done` pulses when h_t and C_t are written. h_t can be read through
// the h_re/h_raddr/h_rdata port (one-clock latency) while the cell is idle.
// Timing: `done` rises HIDDEN*(HIDDEN+INPUT+6) + 4 clock edges after the edge that samples
// `start` (each unit takes HIDDEN+INPUT+6 cycles; 4 more drain the state update).
// Sequencing the units one after another with all four gates in parallel follows the
// architecture; the bias prefetch cycle, the ping-pong h banks and the overlap of the state
// update with the next unit are this design's choices.
module lstm_cell
  import lstm_pkg::*;
#(
  parameter int unsigned HIDDEN    = 20,
  parameter int unsigned INPUT     = 1,
  parameter int unsigned W         = DATA_W,
  parameter int unsigned FRAC      = FRAC_W,
  parameter alu_res_e    ALU_RES   = ALU_DSP,
  parameter mem_res_e    W_RES     = MEM_AUTO,
  parameter hs_method_e  HS_METHOD = HS_STEP,
  parameter int          HT_MAX    = 2 ** FRAC,
  parameter int          HT_MIN    = -(2 ** FRAC),
  localparam int unsigned NCAT     = HIDDEN + INPUT,
  localparam int unsigned WDEPTH   = HIDDEN * NCAT,
  localparam int unsigned ADDR_W   = $clog2(WDEPTH),
  localparam int unsigned HIDX_W   = (HIDDEN > 1) ? $clog2(HIDDEN) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // parameter loading
  input  logic                wr_en,
  input  param_sel_e          wr_sel,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [W-1:0]        wr_data,
  // step control
  input  logic                clear,
  input  logic                start,
  input  logic signed [W-1:0] x_t [INPUT],
  output logic                busy,
  output logic                done,
  // hidden state read-out
  input  logic                h_re,
  input  logic [HIDX_W-1:0]   h_raddr,
  output logic signed [W-1:0] h_rdata
);

  localparam int unsigned LEN_W = $clog2(NCAT + 1);
  localparam int unsigned BAW   = HIDX_W;

  typedef enum logic [2:0] {C_IDLE, C_BIAS, C_START, C_RUN, C_DRAIN} cstate_e;
  cstate_e state;

  logic [HIDX_W-1:0]   k;
  logic signed [W-1:0] c_mem  [HIDDEN];
  logic signed [W-1:0] h_bank [2][HIDDEN];
  logic                cur;                    // bank holding h_{t-1}

  // gate datapath
  logic                alu_start;
  logic [3:0]          alu_busy, alu_rd_en, alu_valid;
  logic [LEN_W-1:0]    alu_idx [4];
  logic signed [W-1:0] alu_out [4];
  logic [W-1:0]        w_rdata [4];
  logic [W-1:0]        b_rdata [4];
  logic signed [W-1:0] b_q;                    // registered [h_{t-1}, x_t][j]

  for (genvar g = 0; g < 4; g++) begin : g_gate
    logic [ADDR_W-1:0] w_raddr;
    assign w_raddr = ADDR_W'(int'(k) * NCAT + int'(alu_idx[g]));

    param_mem #(.W(W), .DEPTH(WDEPTH), .RES(W_RES)) u_w (
      .clk(clk),
      .we(wr_en && wr_sel == param_sel_e'(int'(SEL_WI) + g)), .waddr(wr_addr), .wdata(wr_data),
      .re(alu_rd_en[g]), .raddr(w_raddr), .rdata(w_rdata[g])
    );
    param_mem #(.W(W), .DEPTH(HIDDEN), .RES(W_RES)) u_b (
      .clk(clk),
      .we(wr_en && wr_sel == param_sel_e'(int'(SEL_BI) + g)), .waddr(BAW'(wr_addr)), .wdata(wr_data),
      .re(state == C_BIAS), .raddr(k), .rdata(b_rdata[g])
    );
    mac_alu #(.W(W), .FRAC(FRAC), .MAX_LEN(NCAT), .RES(ALU_RES)) u_alu (
      .clk(clk), .rst_n(rst_n), .start(alu_start), .len(LEN_W'(NCAT)), .bias(b_rdata[g]),
      .busy(alu_busy[g]), .rd_en(alu_rd_en[g]), .idx(alu_idx[g]),
      .a_in(w_rdata[g]), .b_in(b_q), .out(alu_out[g]), .out_valid(alu_valid[g])
    );
  end

  // Data loading of the shared operand [h_{t-1}, x_t][j]; all four ALUs run in lock step.
  always_ff @(posedge clk) begin
    if (alu_rd_en[0]) begin
      if (int'(alu_idx[0]) < HIDDEN) b_q <= h_bank[cur][HIDX_W'(alu_idx[0])];
      else                           b_q <= x_t[int'(alu_idx[0]) - HIDDEN];
    end
  end

  // Activation functions and state update.
  logic signed [W-1:0] i_act, f_act, g_act, o_act, c_to_act, c_tanh, c_new, h_new;
  logic                su_valid;
  logic [HIDX_W-1:0]   su_idx;

  activation_unit #(.W(W), .FRAC(FRAC), .HS_METHOD(HS_METHOD), .HT_MAX(HT_MAX), .HT_MIN(HT_MIN)) u_act (
    .pre_i(alu_out[0]), .pre_f(alu_out[1]), .pre_g(alu_out[2]), .pre_o(alu_out[3]),
    .c_in(c_to_act),
    .i_act(i_act), .f_act(f_act), .g_act(g_act), .o_act(o_act), .c_tanh(c_tanh)
  );

  state_update #(.W(W), .FRAC(FRAC), .IDX_W(HIDX_W), .RES(ALU_RES)) u_su (
    .clk(clk), .rst_n(rst_n),
    .in_valid(alu_valid[0]), .in_idx(k),
    .i_act(i_act), .f_act(f_act), .g_act(g_act), .o_act(o_act), .c_prev(c_mem[k]),
    .c_to_act(c_to_act), .c_tanh(c_tanh),
    .out_valid(su_valid), .out_idx(su_idx), .c_new(c_new), .h_new(h_new)
  );

  // Per-unit sequencing (part of the layer control).
  assign alu_start = (state == C_START);
  assign busy      = (state != C_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE;
      k     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        C_IDLE:  if (start) begin
          k     <= '0;
          state <= C_BIAS;
        end
        C_BIAS:  state <= C_START;
        C_START: state <= C_RUN;
        C_RUN:   if (alu_valid[0]) begin
          if (int'(k) == HIDDEN - 1) state <= C_DRAIN;
          else begin
            k     <= k + 1'b1;
            state <= C_BIAS;
          end
        end
        C_DRAIN: if (su_valid && int'(su_idx) == HIDDEN - 1) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // State storage: write-back, bank swap and clearing.
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      cur <= 1'b0;
      for (int u = 0; u < HIDDEN; u++) begin
        c_mem[u]     <= '0;
        h_bank[0][u] <= '0;
        h_bank[1][u] <= '0;
      end
    end else begin
      if (su_valid) begin
        c_mem[su_idx]       <= c_new;
        h_bank[~cur][su_idx] <= h_new;
      end
      if (state == C_DRAIN && su_valid && int'(su_idx) == HIDDEN - 1) cur <= ~cur;
    end
  end

  always_ff @(posedge clk) begin
    if (h_re) h_rdata <= h_bank[cur][h_raddr];
  end

  a_gates_lockstep: assert property (@(posedge clk) disable iff (!rst_n) alu_valid[0] |-> &alu_valid);
  a_alu_free:       assert property (@(posedge clk) disable iff (!rst_n) alu_start |-> alu_busy == 4'b0);
  a_clear_idle:     assert property (@(posedge clk) disable iff (!rst_n) clear |-> state == C_IDLE);

endmodule
