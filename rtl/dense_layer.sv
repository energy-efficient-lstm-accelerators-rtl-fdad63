// dense_layer: the fully connected output layer, y = W * h_t + B.
//
// One pipelined MAC ALU computes the OUT_FEATURES outputs one after another. For output p the
// layer controller prefetches B[p], starts the ALU with it as the initial sum, and the ALU walks
// j = 0 .. IN_FEATURES-1 reading W[p*IN_FEATURES + j] from its weight memory and h_t[j] from the
// LSTM layer through the h_re/h_raddr/h_rdata port (one-clock read latency). Each result is
// rounded and saturated to (FRAC, W) and held on y[p]; `done` pulses after the last output.
// Parameters are loaded through the wr_* port (SEL_DW, SEL_DB). Timing: `done` rises
// OUT_FEATURES * (IN_FEATURES + 6) clock edges after the edge that samples `start`. Running the outputs sequentially on one
// ALU follows the architecture (a single dense-layer ALU); the bias prefetch is this design's.
module dense_layer
  import lstm_pkg::*;
#(
  parameter int unsigned IN_FEATURES  = 20,
  parameter int unsigned OUT_FEATURES = 1,
  parameter int unsigned W            = DATA_W,
  parameter int unsigned FRAC         = FRAC_W,
  parameter alu_res_e    ALU_RES      = ALU_DSP,
  parameter mem_res_e    W_RES        = MEM_AUTO,
  localparam int unsigned WDEPTH      = IN_FEATURES * OUT_FEATURES,
  localparam int unsigned ADDR_W      = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned HIDX_W      = (IN_FEATURES > 1) ? $clog2(IN_FEATURES) : 1,
  localparam int unsigned PIDX_W      = (OUT_FEATURES > 1) ? $clog2(OUT_FEATURES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  param_sel_e          wr_sel,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [W-1:0]        wr_data,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic                h_re,
  output logic [HIDX_W-1:0]   h_raddr,
  input  logic signed [W-1:0] h_rdata,
  output logic signed [W-1:0] y [OUT_FEATURES]
);

  localparam int unsigned LEN_W = $clog2(IN_FEATURES + 1);

  typedef enum logic [1:0] {D_IDLE, D_BIAS, D_START, D_RUN} dstate_e;
  dstate_e state;

  logic [PIDX_W-1:0]   p;
  logic                alu_busy, alu_valid;
  logic [LEN_W-1:0]    alu_idx;
  logic signed [W-1:0] alu_out;
  logic [W-1:0]        w_rdata, b_rdata;

  logic                h_re_int;

  assign h_re    = h_re_int;
  assign h_raddr = HIDX_W'(alu_idx);

  param_mem #(.W(W), .DEPTH(WDEPTH), .RES(W_RES)) u_w (
    .clk(clk), .we(wr_en && wr_sel == SEL_DW), .waddr(wr_addr), .wdata(wr_data),
    .re(h_re_int), .raddr(ADDR_W'(int'(p) * IN_FEATURES + int'(alu_idx))), .rdata(w_rdata)
  );
  param_mem #(.W(W), .DEPTH(OUT_FEATURES), .RES(W_RES)) u_b (
    .clk(clk), .we(wr_en && wr_sel == SEL_DB), .waddr(PIDX_W'(wr_addr)), .wdata(wr_data),
    .re(state == D_BIAS), .raddr(p), .rdata(b_rdata)
  );

  mac_alu #(.W(W), .FRAC(FRAC), .MAX_LEN(IN_FEATURES), .RES(ALU_RES)) u_alu (
    .clk(clk), .rst_n(rst_n), .start(state == D_START), .len(LEN_W'(IN_FEATURES)), .bias(b_rdata),
    .busy(alu_busy), .rd_en(h_re_int), .idx(alu_idx),
    .a_in(w_rdata), .b_in(h_rdata), .out(alu_out), .out_valid(alu_valid)
  );

  assign busy = (state != D_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= D_IDLE;
      p     <= '0;
      done  <= 1'b0;
      for (int q = 0; q < OUT_FEATURES; q++) y[q] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        D_IDLE:  if (start) begin
          p     <= '0;
          state <= D_BIAS;
        end
        D_BIAS:  state <= D_START;
        D_START: state <= D_RUN;
        D_RUN:   if (alu_valid) begin
          y[p] <= alu_out;
          if (int'(p) == OUT_FEATURES - 1) begin
            done  <= 1'b1;
            state <= D_IDLE;
          end else begin
            p     <= p + 1'b1;
            state <= D_BIAS;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  a_alu_free: assert property (@(posedge clk) disable iff (!rst_n) state == D_START |-> !alu_busy);

endmodule
