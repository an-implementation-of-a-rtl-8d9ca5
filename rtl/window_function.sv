// Window function unit, common to all GF cores.
//
// A software-loaded table w[0..WIN_MAX-1] (18 bit, 16 fractional bits, so
// windows with negative lobes such as flat-top fit) is applied cyclically to
// the synchronous outputs of all NDDC DDCs: sample n of every window is
// multiplied by w[n mod win_size]. The unit also marks the first and the last
// sample of each window, which start and end the Goertzel iterations in the
// cores. The paper states that the window is common to all cores, applied
// cyclically and configurable by software, and uses sizes 32 to 1024; the
// table format, rounding and the enable behaviour are this design's choices.
//
// Interface: in_valid/in[] once per R_DEC clocks (all DDCs together);
// out_valid/out[]/first/last one clock later. While enable is low the
// window index is held at 0, so the first sample after enable starts a
// window. win_size must be 2..WIN_MAX.
module window_function
  import gfb_pkg::*;
#(
  parameter int NDDC    = 8,
  parameter int WIN_MAX = 1024
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        enable,
  input  logic [$clog2(WIN_MAX):0]    win_size,
  input  logic                        win_we,
  input  logic [$clog2(WIN_MAX)-1:0]  win_addr,
  input  logic signed [WIN_W-1:0]     win_data,
  input  logic                        in_valid,
  input  ddc_iq_t                     in [NDDC],
  output logic                        out_valid,
  output logic                        out_first,
  output logic                        out_last,
  output ddc_iq_t                     out [NDDC]
);

  localparam int AW = $clog2(WIN_MAX);

  logic signed [WIN_W-1:0] wtab [WIN_MAX];
  logic signed [WIN_W-1:0] w_cur;
  logic [AW:0]             idx;

  // coefficient table: written by software, read at the current index
  always_ff @(posedge clk) begin
    if (win_we) wtab[win_addr] <= win_data;
    w_cur <= wtab[idx[AW-1:0]];
  end

  // apply w[idx]; w_cur was read at least one clock before in_valid, since
  // samples arrive R_DEC clocks apart and idx only moves on a sample
  always_ff @(posedge clk) begin
    if (rst) begin
      idx <= '0; out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= in_valid && enable;
      if (!enable) begin
        idx <= '0;
      end else if (in_valid) begin
        out_first <= (idx == '0);
        out_last  <= (idx == win_size - 1'b1);
        idx       <= (idx == win_size - 1'b1) ? '0 : idx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int d = 0; d < NDDC; d++) begin
        out[d].i <= DDC_W'(sat((in[d].i * w_cur + (1 <<< (WIN_FRAC - 1))) >>> WIN_FRAC, DDC_W));
        out[d].q <= DDC_W'(sat((in[d].q * w_cur + (1 <<< (WIN_FRAC - 1))) >>> WIN_FRAC, DDC_W));
      end
    end
  end

endmodule
