// param_mem: on-chip store for one weight matrix or bias vector.
//
// A DEPTH x W memory with one write port, used by the host to load trained parameters before
// inference, and one synchronous read port: `rdata` shows word `raddr` one clock after `re` was
// high, and holds otherwise. The read register doubles as the data-loading stage (S2) of the
// ALU that reads the memory. RES carries the weight_resource_type meta-parameter as a vendor
// `ram_style` attribute: MEM_LUTRAM asks for distributed RAM, MEM_BRAM for block RAM and
// MEM_AUTO leaves the choice to the tool. The storage is held only on chip; loading it through
// a write port (rather than from an initialisation file) is this design's choice.
module param_mem
  import lstm_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned DEPTH = 420,
  parameter mem_res_e    RES   = MEM_AUTO,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  if (RES == MEM_LUTRAM) begin : g_lutram
    (* ram_style = "distributed" *) logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      if (re) rdata <= mem[raddr];
    end
  end else if (RES == MEM_BRAM) begin : g_bram
    (* ram_style = "block" *) logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      if (re) rdata <= mem[raddr];
    end
  end else begin : g_auto
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      if (re) rdata <= mem[raddr];
    end
  end

  a_waddr: assert property (@(posedge clk) we |-> 32'(waddr) < DEPTH);
  a_raddr: assert property (@(posedge clk) re |-> 32'(raddr) < DEPTH);

endmodule
