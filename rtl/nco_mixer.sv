// NCO and complex mixer of the firmware DDC.
//
// A phase accumulator advances by the tuning word ftw on every input sample;
// its top LUT_AW bits address a cosine/sine table computed at elaboration.
// The input x = I + jQ is multiplied by exp(-j*phi) with three multipliers
// (the paper's mixer uses three DSP slices; the three-multiplier form used
// here is k1 = c(I+Q), k2 = I(s-c), k3 = Q(c+s) with c = cos, s = -sin,
// giving re = k1 - k3 and im = k1 + k2). The tone at +f = ftw/2^32 * fs
// is therefore moved to 0 Hz.
//
// Interface: in_valid/in (16 bit IQ) -> out_valid/out (18 bit IQ, same LSB
// weight as the input, rounded). Latency 4 clocks, one sample per clock.
// The table size, phase width and rounding are this design's choices.
module nco_mixer
  import gfb_pkg::*;
#(
  parameter int PHASE_W = 32,
  parameter int LUT_AW  = 10
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PHASE_W-1:0] ftw,
  input  logic               in_valid,
  input  adc_iq_t            in,
  output logic               out_valid,
  output ddc_iq_t            out
);

  localparam int LUT_N = 1 << LUT_AW;
  localparam int LUT_W = 18;             // Q1.16
  typedef logic signed [LUT_W-1:0] lut_t [LUT_N];

  function automatic lut_t gen_lut(input bit want_sin);
    lut_t r;
    real ph;
    for (int n = 0; n < LUT_N; n++) begin
      ph   = 2.0 * 3.14159265358979323846 * real'(n) / real'(LUT_N);
      r[n] = LUT_W'($rtoi((want_sin ? $sin(ph) : $cos(ph)) * 65535.0));
    end
    return r;
  endfunction

  localparam lut_t COS_LUT = gen_lut(1'b0);
  localparam lut_t SIN_LUT = gen_lut(1'b1);

  logic [PHASE_W-1:0] phase;

  // stage 1: table read, input registered
  logic signed [LUT_W-1:0] c1, s1;
  adc_iq_t                 x1;
  logic                    v1;
  // stage 2: pre-adders
  logic signed [ADC_W:0]   iq_sum2;
  logic signed [LUT_W:0]   smc2, cps2;
  logic signed [LUT_W-1:0] c2;
  adc_iq_t                 x2;
  logic                    v2;
  // stage 3: products
  logic signed [ADC_W+LUT_W+1:0] k1_3, k2_3, k3_3;
  logic                          v3;
  // rounded products, Q0 again
  logic signed [ADC_W+LUT_W+1:0] r_i, r_q;
  assign r_i = (k1_3 - k3_3 + (ADC_W+LUT_W+2)'(32768)) >>> 16;
  assign r_q = (k1_3 + k2_3 + (ADC_W+LUT_W+2)'(32768)) >>> 16;

  always_ff @(posedge clk) begin
    if (rst) begin
      phase <= '0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; out_valid <= 1'b0;
    end else begin
      if (in_valid) phase <= phase + ftw;
      v1 <= in_valid; v2 <= v1; v3 <= v2; out_valid <= v3;
    end
  end

  always_ff @(posedge clk) begin
    // exp(-j phi): c = cos(phi), s = -sin(phi)
    c1 <= COS_LUT[phase[PHASE_W-1 -: LUT_AW]];
    s1 <= -SIN_LUT[phase[PHASE_W-1 -: LUT_AW]];
    x1 <= in;

    iq_sum2 <= (ADC_W+1)'(x1.i) + (ADC_W+1)'(x1.q);
    smc2    <= (LUT_W+1)'(s1) - (LUT_W+1)'(c1);
    cps2    <= (LUT_W+1)'(c1) + (LUT_W+1)'(s1);
    c2      <= c1;
    x2      <= x1;

    k1_3 <= c2 * iq_sum2;
    k2_3 <= x2.i * smc2;
    k3_3 <= x2.q * cps2;

    out.i <= DDC_W'(sat(128'(r_i), DDC_W));
    out.q <= DDC_W'(sat(128'(r_q), DDC_W));
  end

endmodule
