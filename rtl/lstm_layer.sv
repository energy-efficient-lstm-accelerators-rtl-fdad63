// lstm_layer: an LSTM layer, one LSTM cell run over an input sequence by the layer controller.
//
// On `start` the controller clears the cell (h_0 = C_0 = 0) and then runs the cell once per
// element of the sequence, t = 0 .. seq_len-1. `t_idx` tells the surrounding logic which input
// x_t to present on `x_t`; it must be valid from the cycle after `t_idx` changes until the step
// ends. After the last step `done` pulses and the final hidden state h_t can be read through the
// cell's h read port. Parameters are loaded through the wr_* port as in lstm_cell.
// Timing: `done` rises seq_len * (HIDDEN*(HIDDEN+INPUT+6) + 6) clock edges after the edge that
// samples `start` (the cell's step time plus two cycles of hand-over per element). The sequence length is a run-time input (at most SEQ_MAX); its range and
// the handshake are this design's choices.
module lstm_layer
  import lstm_pkg::*;
#(
  parameter int unsigned HIDDEN    = 20,
  parameter int unsigned INPUT     = 1,
  parameter int unsigned SEQ_MAX   = 16,
  parameter int unsigned W         = DATA_W,
  parameter int unsigned FRAC      = FRAC_W,
  parameter alu_res_e    ALU_RES   = ALU_DSP,
  parameter mem_res_e    W_RES     = MEM_AUTO,
  parameter hs_method_e  HS_METHOD = HS_STEP,
  parameter int          HT_MAX    = 2 ** FRAC,
  parameter int          HT_MIN    = -(2 ** FRAC),
  localparam int unsigned ADDR_W   = $clog2(HIDDEN * (HIDDEN + INPUT)),
  localparam int unsigned HIDX_W   = (HIDDEN > 1) ? $clog2(HIDDEN) : 1,
  localparam int unsigned SEQ_W    = $clog2(SEQ_MAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  param_sel_e          wr_sel,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [W-1:0]        wr_data,
  input  logic                start,
  input  logic [SEQ_W-1:0]    seq_len,    // 1..SEQ_MAX, held while busy
  output logic [SEQ_W-1:0]    t_idx,
  input  logic signed [W-1:0] x_t [INPUT],
  output logic                busy,
  output logic                done,
  input  logic                h_re,
  input  logic [HIDX_W-1:0]   h_raddr,
  output logic signed [W-1:0] h_rdata
);

  typedef enum logic [1:0] {L_IDLE, L_STEP, L_WAIT} lstate_e;
  lstate_e state;

  logic cell_clear, cell_start, cell_busy, cell_done;

  assign cell_clear = (state == L_IDLE) && start;
  assign cell_start = (state == L_STEP);
  assign busy       = (state != L_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= L_IDLE;
      t_idx <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        L_IDLE: if (start) begin
          t_idx <= '0;
          state <= L_STEP;
        end
        L_STEP: state <= L_WAIT;
        L_WAIT: if (cell_done) begin
          if (t_idx == seq_len - 1'b1) begin
            done  <= 1'b1;
            state <= L_IDLE;
          end else begin
            t_idx <= t_idx + 1'b1;
            state <= L_STEP;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  lstm_cell #(
    .HIDDEN(HIDDEN), .INPUT(INPUT), .W(W), .FRAC(FRAC), .ALU_RES(ALU_RES), .W_RES(W_RES),
    .HS_METHOD(HS_METHOD), .HT_MAX(HT_MAX), .HT_MIN(HT_MIN)
  ) u_cell (
    .clk(clk), .rst_n(rst_n),
    .wr_en(wr_en), .wr_sel(wr_sel), .wr_addr(wr_addr), .wr_data(wr_data),
    .clear(cell_clear), .start(cell_start), .x_t(x_t), .busy(cell_busy), .done(cell_done),
    .h_re(h_re), .h_raddr(h_raddr), .h_rdata(h_rdata)
  );

  a_seq_len:    assert property (@(posedge clk) disable iff (!rst_n) (start && state == L_IDLE) |-> seq_len != 0 && 32'(seq_len) <= SEQ_MAX);
  a_cell_ready: assert property (@(posedge clk) disable iff (!rst_n) cell_start |-> !cell_busy);

endmodule
