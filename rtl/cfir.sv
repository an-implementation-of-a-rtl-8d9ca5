// Compensation FIR (CFIR) of the firmware DDC, one real component.
//
// The CFIR runs after the CIC at the decimated rate (one sample every R_DEC
// clocks), so each of its NMAC multipliers is reused TAPS/NMAC times per
// output sample: with 8 multipliers per component (16 for I and Q, as in the
// paper) and 8 clocks per sample the filter has 64 taps. On each input
// sample the delay line shifts; during the next TAPS/NMAC clocks multiplier j
// accumulates taps j*(TAPS/NMAC) .. j*(TAPS/NMAC)+TAPS/NMAC-1, then the NMAC
// partial sums are added, rounded and saturated.
//
// The coefficients are written by software (coef_we/coef_addr/coef_data,
// CFIR_FRAC fractional bits); the paper designs them with a vendor tool and
// does not print them, so they reset to a pass-through (h[0] = 1 - 2^-17).
//
// Interface: in_valid/in -> out_valid/out, latency TAPS/NMAC + 2 clocks.
// Input samples must be at least TAPS/NMAC clocks apart (asserted).
module cfir
  import gfb_pkg::*;
#(
  parameter int TAPS = 64,
  parameter int NMAC = 8,
  parameter int W    = DDC_W
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         coef_we,
  input  logic [$clog2(TAPS)-1:0]      coef_addr,
  input  logic signed [CFIR_W-1:0]     coef_data,
  input  logic                         in_valid,
  input  logic signed [W-1:0]          in,
  output logic                         out_valid,
  output logic signed [W-1:0]          out
);

  localparam int PER   = TAPS / NMAC;          // taps per multiplier
  localparam int PB    = (PER > 1) ? $clog2(PER) : 1;
  localparam int ACC_W = W + CFIR_W + $clog2(TAPS) + 1;

  logic signed [CFIR_W-1:0] h [TAPS];
  logic signed [W-1:0]      dl [TAPS];
  logic signed [ACC_W-1:0]  acc [NMAC];
  logic [PB-1:0]            cnt;
  logic                     busy, done;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int t = 0; t < TAPS; t++) begin
        h[t]  <= (t == 0) ? CFIR_W'((1 << CFIR_FRAC) - 1) : '0;
        dl[t] <= '0;
      end
    end else begin
      if (coef_we) h[coef_addr] <= coef_data;
      if (in_valid) begin
        dl[0] <= in;
        for (int t = 1; t < TAPS; t++) dl[t] <= dl[t-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0; out_valid <= 1'b0; out <= '0;
      for (int j = 0; j < NMAC; j++) acc[j] <= '0;
    end else begin
      done <= busy && cnt == PB'(PER - 1);
      if (in_valid) begin
        busy <= 1'b1; cnt <= '0;
      end else if (busy) begin
        cnt <= cnt + 1'b1;
        if (cnt == PB'(PER - 1)) busy <= 1'b0;
      end
      if (busy)
        for (int j = 0; j < NMAC; j++)
          acc[j] <= ((cnt == '0) ? '0 : acc[j]) + ACC_W'(dl[j*PER + int'(cnt)] * h[j*PER + int'(cnt)]);
      out_valid <= done;
      if (done) begin
        automatic logic signed [ACC_W-1:0] s = '0;
        for (int j = 0; j < NMAC; j++) s += acc[j];
        s += ACC_W'(1) <<< (CFIR_FRAC - 1);
        out <= W'(sat(128'(s >>> CFIR_FRAC), W));
      end
    end
  end

  // A new sample must not arrive while the multipliers are still busy.
  assert property (@(posedge clk) disable iff (rst) in_valid |-> !busy || cnt == PB'(PER - 1))
    else $error("cfir: input samples closer than %0d clocks", PER);

endmodule
