// Cartesian-to-polar converter for the X[k] results (polar output mode).
//
// Fully pipelined CORDIC in vectoring mode: a vector in the left half plane
// is first turned by pi, then ITER micro-rotations drive the imaginary part
// to zero while the rotation angles atan(2^-i) are summed. The magnitude is
// multiplied by the CORDIC gain correction 0.6072529 (32 fractional bits). The datapath
// carries G = 6 guard bits below the input LSB to keep rounding small. The paper
// offers a Cartesian or polar output chosen at synthesis time and gives
// |X| = sqrt(re^2 + im^2), phi = atan(im/re); the CORDIC method is this
// design's choice.
//
// Interface: in_valid/re/im/tag_in -> out_valid/mag/phase/tag_out after
// ITER + 2 clocks, one result per clock. mag is unsigned in the LSB of the
// input (saturated to W-1 bits); phase is in turns, 2^W = 2*pi, two's
// complement (so -pi .. pi).
module polar_cordic #(
  parameter int W     = 32,
  parameter int ITER  = 30,
  parameter int TAG_W = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic [TAG_W-1:0]    tag_in,
  input  logic signed [W-1:0] re,
  input  logic signed [W-1:0] im,
  output logic                out_valid,
  output logic [TAG_W-1:0]    tag_out,
  output logic signed [W-1:0] mag,
  output logic signed [W-1:0] phase
);

  localparam int G  = 6;                        // guard bits below the input LSB
  localparam int IW = W + 3 + G;
  localparam int KB = 32;                       // fraction bits of the gain correction
  localparam logic [KB-1:0] K_INV = 32'd2608131496; // round(0.6072529350 * 2^32)

  typedef logic [W-1:0] atan_t [ITER];
  // atan(2^-i) in turns: round(atan(2^-i) / (2*pi) * 2^W)
  function automatic atan_t gen_atan();
    atan_t r;
    for (int i = 0; i < ITER; i++)
      r[i] = W'(longint'($atan(2.0 ** (-i)) / (2.0 * 3.14159265358979323846) * (2.0 ** W) + 0.5));
    return r;
  endfunction
  localparam atan_t ATAN = gen_atan();

  logic signed [IW-1:0] xs [ITER+1];
  logic signed [IW-1:0] ys [ITER+1];
  logic [W-1:0]         zs [ITER+1];
  logic [TAG_W-1:0]     ts [ITER+1];
  logic [ITER+1:0]      vs;

  // pre-rotation into the right half plane
  always_ff @(posedge clk) begin
    if (re < 0) begin
      xs[0] <= -(IW'(re) <<< G); ys[0] <= -(IW'(im) <<< G); zs[0] <= W'(1) << (W - 1);
    end else begin
      xs[0] <= IW'(re) <<< G;    ys[0] <= IW'(im) <<< G;    zs[0] <= '0;
    end
    ts[0] <= tag_in;
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ATAN[i];
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ATAN[i];
      end
      ts[i+1] <= ts[i];
    end
  end

  logic signed [IW+KB:0] m_full;
  assign m_full = xs[ITER] * $signed({1'b0, K_INV});

  always_ff @(posedge clk) begin
    mag     <= (m_full >>> (KB + G)) > (((IW+KB+1)'(1) <<< (W - 1)) - (IW+KB+1)'(1)) ? W'((64'sd1 <<< (W - 1)) - 1)
                                                                            : W'(m_full >>> (KB + G));
    phase   <= zs[ITER];
    tag_out <= ts[ITER];
  end

  always_ff @(posedge clk) begin
    if (rst) vs <= '0;
    else     vs <= {vs[ITER:0], in_valid};
  end
  assign out_valid = vs[ITER+1];

endmodule
