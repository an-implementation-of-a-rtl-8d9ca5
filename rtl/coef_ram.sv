// Coefficient block RAM of the non-iterative section (one of a, b, c, d).
//
// Simple dual-port memory: software writes through the coefficient
// data/address bus, the X[k] unit reads with a registered (one-clock)
// output, as a block RAM does. Contents are not reset.
module coef_ram
  import gfb_pkg::*;
#(
  parameter int DEPTH = CORES_PER_XK * DDC_PER_CORE,
  parameter int W     = COEF_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
