// mac_alu: pipelined fixed-point multiply-accumulate ALU for one vector inner product.
//
// Computes  out = round_sat( bias * 2^FRAC + sum_{j<len} a[j]*b[j] )  in (FRAC, W) fixed point.
// The loop runs through five pipeline stages, one clock each:
//   S1 initialisation   - `start` is sampled, the accumulator is loaded, the index is cleared
//   S2 data loading     - the ALU drives `rd_en`/`idx`; the operand memories register a[idx]
//                          and b[idx] on the same clock edge (their read register is S2)
//   S3 multiplication   - a*b into a full-width 2W-bit product, (8,16) for (4,8) operands
//   S4 accumulation     - the product is added to a wide accumulator
//   S5 rounding/output  - after the last iteration the sum is rounded to W bits, saturated
//                          and registered on `out`, with a one-cycle `out_valid` pulse
// Iteration j enters S2 one cycle after iteration j-1, so S2, S3 and S4 of three iterations
// overlap. With `start` sampled at the end of cycle 1, `out_valid` is high in the cycle after
// cycle len+4 (12 cycles for len = 8). As in the pipelined form of the loop, rounding happens
// once at the end, not after each product.
//
// Own choices: the gate bias initialises the accumulator in S1 (shifted to the product scale)
// instead of being added afterwards; the accumulator is wide enough never to overflow; rounding
// is half-up with saturation. `start` is taken only while `busy` is low; `busy` falls in the
// cycle `out_valid` is high, so a new inner product may start in that cycle.
module mac_alu
  import lstm_pkg::*;
#(
  parameter int unsigned W       = DATA_W,
  parameter int unsigned FRAC    = FRAC_W,
  parameter int unsigned MAX_LEN = 256,
  parameter alu_res_e    RES     = ALU_DSP,
  localparam int unsigned LEN_W  = $clog2(MAX_LEN + 1),
  localparam int unsigned ACC_W  = 2 * W + LEN_W + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [LEN_W-1:0]    len,       // vector length, 1..MAX_LEN, held during the run
  input  logic signed [W-1:0] bias,      // added to the sum, (FRAC, W)
  output logic                busy,
  output logic                rd_en,     // S2: operands at index idx are to be registered
  output logic [LEN_W-1:0]    idx,
  input  logic signed [W-1:0] a_in,      // a[idx], b[idx] of the previous cycle's request
  input  logic signed [W-1:0] b_in,
  output logic signed [W-1:0] out,
  output logic                out_valid
);

  typedef enum logic [0:0] {S_IDLE, S_LOAD} state_e;
  state_e state;

  logic [LEN_W-1:0]        cnt;
  logic                    v_ld, last_ld;     // operands at a_in/b_in are valid (after S2)
  logic                    v_mul, last_mul;   // product register valid (after S3)
  logic                    last_acc;          // accumulator holds the complete sum (after S4)
  logic signed [2*W-1:0]   prod;
  logic signed [ACC_W-1:0] acc;

  // No operand read while reset is asserted: before the first reset edge the state is arbitrary
  // and could otherwise address a word past the end of an operand memory.
  assign rd_en = (state == S_LOAD) && rst_n;
  assign idx   = cnt;

  // S1 and S2: loop control.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      busy  <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start && !busy) begin
          state <= S_LOAD;
          cnt   <= '0;
          busy  <= 1'b1;
        end
        S_LOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == len - 1'b1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (last_acc) busy <= 1'b0;
    end
  end

  // Valid and last flags that travel with each iteration.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {v_ld, last_ld, v_mul, last_mul, last_acc} <= '0;
    end else begin
      v_ld     <= rd_en;
      last_ld  <= rd_en && (cnt == len - 1'b1);
      v_mul    <= v_ld;
      last_mul <= last_ld;
      last_acc <= last_mul;
    end
  end

  // S3: multiplication.
  fxp_mul #(.W(W), .RES(RES)) u_mul (
    .clk(clk), .in_valid(v_ld), .a(a_in), .b(b_in), .p(prod)
  );

  // S1 initialisation and S4 accumulation.
  always_ff @(posedge clk) begin
    if (!rst_n)
      acc <= '0;
    else if (start && !busy)
      acc <= ACC_W'(bias) <<< FRAC;
    else if (v_mul)
      acc <= acc + ACC_W'(prod);
  end

  // S5: rounding and output.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= last_acc;
      if (last_acc) out <= W'(round_sat(64'(acc), FRAC, W));
    end
  end

  // Protocol rules of the interface.
  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> len != 0 && 32'(len) <= MAX_LEN);
  a_no_overlap:  assert property (@(posedge clk) disable iff (!rst_n) last_acc |-> !v_mul);

endmodule
