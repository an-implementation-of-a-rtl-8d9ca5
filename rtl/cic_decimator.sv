// CIC decimator of the firmware DDC (one real component).
//
// N_STAGES integrators run at the input rate, every R-th integrator output
// is passed to N_STAGES comb stages (differential delay 1) at the output
// rate. The DC gain R^N_STAGES is a power of two for R = 8, so the output is
// the comb result shifted right by N_STAGES*log2(R) and has unity DC gain.
// The paper gives the CIC type and R = 8; the number of stages is not
// printed and is this design's choice (3).
//
// Interface: in_valid/in at up to one sample per clock; out_valid pulses
// once per R input samples, one clock after the R-th sample (plus the comb
// pipeline of N_STAGES clocks). N_STAGES must be at least 2. Wrap-around arithmetic in the integrators is
// intended: the combs undo it exactly.
module cic_decimator
  import gfb_pkg::*;
#(
  parameter int R        = R_DEC,
  parameter int N_STAGES = 3,
  parameter int IN_W     = DDC_W,
  parameter int OUT_W    = DDC_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out
);

  localparam int RB    = $clog2(R);
  localparam int ACC_W = IN_W + N_STAGES * RB;

  logic signed [ACC_W-1:0] integ [N_STAGES];
  logic signed [ACC_W-1:0] comb_dly [N_STAGES];   // previous value of comb input
  logic signed [ACC_W-1:0] comb_out [N_STAGES];
  logic [N_STAGES-1:0]     comb_v;
  logic [RB-1:0]           dcnt;
  logic                    dec_v;
  logic signed [ACC_W-1:0] dec_x;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < N_STAGES; s++) begin
        integ[s] <= '0; comb_dly[s] <= '0; comb_out[s] <= '0;
      end
      comb_v <= '0; dcnt <= '0; dec_v <= 1'b0; dec_x <= '0; out_valid <= 1'b0; out <= '0;
    end else begin
      dec_v <= 1'b0;
      if (in_valid) begin
        integ[0] <= integ[0] + ACC_W'(in);
        for (int s = 1; s < N_STAGES; s++) integ[s] <= integ[s] + integ[s-1];
        dcnt <= dcnt + 1'b1;
        if (dcnt == RB'(R - 1)) begin
          dec_v <= 1'b1;
          dec_x <= integ[N_STAGES-1] + integ[N_STAGES-2];
        end
      end
      // comb chain, one register per stage, advancing on output-rate strobes
      comb_v[0] <= dec_v;
      if (dec_v) begin
        comb_out[0] <= dec_x - comb_dly[0];
        comb_dly[0] <= dec_x;
      end
      for (int s = 1; s < N_STAGES; s++) begin
        comb_v[s] <= comb_v[s-1];
        if (comb_v[s-1]) begin
          comb_out[s] <= comb_out[s-1] - comb_dly[s];
          comb_dly[s] <= comb_out[s-1];
        end
      end
      out_valid <= comb_v[N_STAGES-1];
      if (comb_v[N_STAGES-1]) out <= OUT_W'(comb_out[N_STAGES-1] >>> (N_STAGES * RB));
    end
  end

endmodule
