// Combiner of a GF core.
//
// Collects one sample from each of the DDC_PER_CORE = 4 DDCs that feed the
// core and serializes their 8 real components to the core's single Goertzel
// mapping, one per clock, in slot order I0 Q0 I1 Q1 I2 Q2 I3 Q3 (slot =
// {ddc, q}). As in the paper, this uses the 8 clocks between two decimated
// samples to let one 2-DSP-slice Goertzel structure serve 4 complex bins.
// The slot order is this design's choice.
//
// Interface: in_valid/in[]/in_first/in_last at most once every TDM clocks;
// out_valid is high for the TDM clocks that follow, with out_slot counting
// 0..TDM-1 and out_first/out_last repeating the window marks of the sample.
module combiner
  import gfb_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  ddc_iq_t                in [DDC_PER_CORE],
  output logic                   out_valid,
  output logic [$clog2(TDM)-1:0] out_slot,
  output logic                   out_first,
  output logic                   out_last,
  output logic signed [DDC_W-1:0] out_x
);

  ddc_iq_t hold [DDC_PER_CORE];
  logic    first_q, last_q;
  logic [$clog2(TDM)-1:0] slot;
  logic    busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; slot <= '0;
    end else if (in_valid) begin
      busy <= 1'b1; slot <= '0;
    end else if (busy) begin
      slot <= slot + 1'b1;
      if (slot == $clog2(TDM)'(TDM - 1)) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hold    <= in;
      first_q <= in_first;
      last_q  <= in_last;
    end
  end

  assign out_valid = busy;
  assign out_slot  = slot;
  assign out_first = first_q;
  assign out_last  = last_q;
  assign out_x     = slot[0] ? hold[slot[$clog2(TDM)-1:1]].q : hold[slot[$clog2(TDM)-1:1]].i;

  assert property (@(posedge clk) disable iff (rst) in_valid |-> !busy || slot == $clog2(TDM)'(TDM - 1))
    else $error("combiner: samples closer than %0d clocks", TDM);

endmodule
