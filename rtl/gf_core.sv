// GF core: combiner plus Goertzel filter, computing 4 complex DFT bins
// (8 real Goertzel filters, one per I/Q component of 4 DDCs).
//
// The combiner serializes the 8 windowed components of one decimated sample
// into 8 consecutive clocks (TDM slots). The single Goertzel mapping
// computes w0 = x + kg*w1 - w2 for the slot in hand, with kg taken from the
// kg bank for the slot's bin. Its outputs (new w1, new w2) run through two
// delay lines so that they return to the mapping exactly TDM clocks later,
// when the same slot's next sample arrives (mapping latency 3 + delay line
// TDM-3 = 8). On the first sample of a window w1 and w2 are forced to 0;
// after the last sample the mapping outputs of the 8 slots are the final
// (w1, w2) pairs and are handed to the non-iterative section. This structure
// (combiner, kg SRL/sync buffer/MUX, TDM channel select, state delay lines)
// follows the paper's block diagram.
//
// Timing: samples must arrive every TDM clocks without gaps during a window
// (the DDCs deliver exactly that when the ADC stream is continuous; this is
// asserted). res_valid is high for the TDM clocks that follow the last
// sample of a window by 4 clocks, with res_slot 0..TDM-1.
module gf_core
  import gfb_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic [3:0]              asf,
  input  logic                    kg_shift,
  input  logic signed [KG_W-1:0]  kg_data,
  input  logic                    kg_update,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  ddc_iq_t                 in [DDC_PER_CORE],
  output logic                    res_valid,
  output logic [$clog2(TDM)-1:0]  res_slot,
  output logic signed [GF_W-1:0]  res_w1,
  output logic signed [GF_W-1:0]  res_w2,
  output logic                    ovf,
  output logic                    kg_pending
);

  localparam int SB  = $clog2(TDM);
  localparam int LAT = 3;              // goertzel_mapping latency
  localparam int DL  = TDM - LAT;      // delay line length

  // TDM channel select (combiner output)
  logic                    c_valid, c_first, c_last;
  logic [SB-1:0]           c_slot;
  logic signed [DDC_W-1:0] c_x;
  logic signed [KG_W-1:0]  kg;

  combiner u_comb (
    .clk, .rst, .in_valid, .in_first, .in_last, .in,
    .out_valid(c_valid), .out_slot(c_slot), .out_first(c_first), .out_last(c_last), .out_x(c_x)
  );

  // kg update allowed after the last slot of a window, or while idle
  logic boundary;
  assign boundary = (c_valid && c_last && c_slot == SB'(TDM - 1)) || !c_valid;

  kg_bank #(.NKG(DDC_PER_CORE)) u_kg (
    .clk, .rst, .kg_shift, .kg_data, .kg_update, .boundary,
    .sel(c_slot[SB-1:1]), .kg_out(kg), .pending(kg_pending)
  );

  // state delay lines
  logic signed [GF_W-1:0] dl1 [DL];
  logic signed [GF_W-1:0] dl2 [DL];
  logic signed [GF_W-1:0] g_w1, g_w2;
  logic                   g_valid;
  logic [SB:0]            g_tag;       // {last, slot}

  goertzel_mapping #(.TAG_W(SB + 1)) u_gam (
    .clk, .rst, .asf,
    .in_valid(c_valid), .tag_in({c_last, c_slot}), .x(c_x),
    .w1(c_first ? '0 : dl1[DL-1]), .w2(c_first ? '0 : dl2[DL-1]), .kg,
    .out_valid(g_valid), .tag_out(g_tag), .w1_out(g_w1), .w2_out(g_w2), .ovf
  );

  always_ff @(posedge clk) begin
    dl1[0] <= g_w1;
    dl2[0] <= g_w2;
    for (int i = 1; i < DL; i++) begin
      dl1[i] <= dl1[i-1];
      dl2[i] <= dl2[i-1];
    end
  end

  assign res_valid = g_valid && g_tag[SB];
  assign res_slot  = g_tag[SB-1:0];
  assign res_w1    = g_w1;
  assign res_w2    = g_w2;

  // Within a window the slots must follow each other without a gap.
  assert property (@(posedge clk) disable iff (rst)
                   (c_valid && c_slot == SB'(TDM - 1) && !c_last) |=> c_valid && c_slot == '0)
    else $error("gf_core: gap in the sample stream inside a window");

endmodule
