// Goertzel Algorithm Mapping: the iterative section w0 = x + kg*w1 - w2.
//
// The pipeline follows the two-DSP-slice mapping of the paper: slice 1
// registers w1 (A) and kg (B), multiplies (M register) and adds the result
// of slice 2 arriving on its cascade input before the P register; slice 2
// registers w2 (A:B) and x (C) and adds them. Here x and w2 get one extra
// register so that all four operands are presented in the same clock; the
// sign of each adder input (M + (x - w2)) follows the algorithm, since the
// figure prints only adder symbols.
//
// Arithmetic scaling: the states are stored as w * 2^(XF - asf). When they
// are reintroduced they are shifted left by asf (an arithmetic shift, asf set
// by software), the input x enters with XF fractional bits and is never
// scaled, and the new state is shifted right by asf before storing. With
// asf = ceil(log2(4N/pi)) a full-scale input cannot overflow the 32-bit
// state (the paper's scaling rule); any overflow saturates and pulses ovf.
//
// Interface: valid/x/w1/w2/kg/tag_in in one clock, the result w1_out = w0
// and w2_out = w1 (the state shifted by one) with tag_out 3 clocks later.
// One new operand set per clock.
module goertzel_mapping
  import gfb_pkg::*;
#(
  parameter int TAG_W = 4
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [3:0]              asf,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        tag_in,
  input  logic signed [DDC_W-1:0] x,
  input  logic signed [GF_W-1:0]  w1,
  input  logic signed [GF_W-1:0]  w2,
  input  logic signed [KG_W-1:0]  kg,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        tag_out,
  output logic signed [GF_W-1:0]  w1_out,
  output logic signed [GF_W-1:0]  w2_out,
  output logic                    ovf
);

  localparam int FW = 80;    // width of the full-precision sum

  // slice 1
  logic signed [GF_W-1:0]      a_p;
  logic signed [KG_W-1:0]      b_p;
  logic signed [GF_W+KG_W-1:0] m;
  // slice 2 (with one alignment register in front)
  logic signed [GF_W-1:0]      w2_d, ab_p;
  logic signed [DDC_W-1:0]     x_d, c_p;
  // bookkeeping
  logic signed [GF_W-1:0]      w1_d;
  logic [TAG_W-1:0]            tag1, tag2;
  logic                        v1, v2;
  logic [3:0]                  sh;

  logic signed [FW-1:0] full, stored;
  logic                 over;

  assign sh = (asf > 4'(XF)) ? 4'(XF) : asf;

  always_comb begin
    full   = ((FW'(m) <<< sh) >>> KG_FRAC) + (FW'(c_p) <<< XF) - (FW'(ab_p) <<< sh);
    stored = full >>> sh;
    over   = (stored > ((FW'(1) <<< (GF_W - 1)) - FW'(1))) || (stored < -(FW'(1) <<< (GF_W - 1)));
  end

  always_ff @(posedge clk) begin
    a_p  <= w1;    b_p  <= kg;
    w2_d <= w2;    x_d  <= x;
    m    <= a_p * b_p;
    ab_p <= w2_d;  c_p  <= x_d;
    w1_d <= a_p;
    tag1 <= tag_in; tag2 <= tag1; tag_out <= tag2;
    w1_out <= GF_W'(sat(128'(stored), GF_W));
    w2_out <= w1_d;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0; ovf <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
      ovf <= v2 && over;
    end
  end

endmodule
