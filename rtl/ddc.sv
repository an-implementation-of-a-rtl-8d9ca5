// Firmware digital down converter (DDC): one complex channel of the coarse
// channelization stage.
//
// The 250 MSPS complex input from the ADC is shifted by the NCO/mixer so
// that the wanted band sits at 0 Hz, decimated by R_DEC = 8 in a CIC filter
// per component, and equalised by the compensation FIR (CFIR), giving
// 31.25 MSPS complex samples 18 bits wide. This chain (mixer, CIC by 8,
// CFIR, 16 -> 18 bits) follows the paper; the filter orders, rounding and
// the pass-through CFIR reset state are this design's choices.
//
// Interface: in_valid/in (adc_iq_t) at up to one sample per clock; ftw is
// the NCO tuning word (f_shift = ftw / 2^32 * f_in); the CFIR coefficient
// write port is shared by the I and Q filters. out_valid pulses once per
// 8 input samples.
module ddc
  import gfb_pkg::*;
#(
  parameter int CIC_N     = 3,
  parameter int CFIR_TAPS = 64,
  parameter int CFIR_NMAC = 8
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [31:0]                  ftw,
  input  logic                         cfir_we,
  input  logic [$clog2(CFIR_TAPS)-1:0] cfir_addr,
  input  logic signed [CFIR_W-1:0]     cfir_data,
  input  logic                         in_valid,
  input  adc_iq_t                      in,
  output logic                         out_valid,
  output ddc_iq_t                      out
);

  logic    mix_v;
  ddc_iq_t mix;
  logic    cic_v_i, cic_v_q, fir_v_q;
  logic signed [DDC_W-1:0] cic_i, cic_q;

  nco_mixer u_mix (
    .clk, .rst, .ftw, .in_valid, .in, .out_valid(mix_v), .out(mix)
  );

  cic_decimator #(.R(R_DEC), .N_STAGES(CIC_N)) u_cic_i (
    .clk, .rst, .in_valid(mix_v), .in(mix.i), .out_valid(cic_v_i), .out(cic_i)
  );
  cic_decimator #(.R(R_DEC), .N_STAGES(CIC_N)) u_cic_q (
    .clk, .rst, .in_valid(mix_v), .in(mix.q), .out_valid(cic_v_q), .out(cic_q)
  );

  cfir #(.TAPS(CFIR_TAPS), .NMAC(CFIR_NMAC)) u_fir_i (
    .clk, .rst, .coef_we(cfir_we), .coef_addr(cfir_addr), .coef_data(cfir_data),
    .in_valid(cic_v_i), .in(cic_i), .out_valid(out_valid), .out(out.i)
  );
  cfir #(.TAPS(CFIR_TAPS), .NMAC(CFIR_NMAC)) u_fir_q (
    .clk, .rst, .coef_we(cfir_we), .coef_addr(cfir_addr), .coef_data(cfir_data),
    .in_valid(cic_v_q), .in(cic_q), .out_valid(fir_v_q), .out(out.q)
  );

  // I and Q paths are identical and run in lock step.
  assert property (@(posedge clk) disable iff (rst) (cic_v_i == cic_v_q) && (out_valid == fir_v_q))
    else $error("ddc: I and Q paths out of step");

endmodule
