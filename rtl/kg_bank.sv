// Feedback-coefficient bank of a GF core: kg SRL, kg sync buffer and MUX.
//
// kg = 2cos(2*pi*k/N) is the only bin-dependent value of the iterative
// section. Software shifts one kg per write into a shift register (the "kg
// SRL"); the 4 words move to the sync buffer when an update has been
// requested and the core is at a window boundary (boundary high), so a
// window is never computed with mixed coefficients. The MUX then gives the
// kg of the bin whose sample is in the current TDM slot. This structure is
// the paper's; the update rule (pending request applied at the boundary) is
// this design's choice. After reset all kg are 0 (bin at fs/4).
//
// Interface: kg_shift/kg_data load the SRL (the word written last ends up
// in bin 0); kg_update requests the move; sel selects a bin, kg_out is
// combinational; pending is high while an update waits for a boundary.
module kg_bank
  import gfb_pkg::*;
#(
  parameter int NKG = DDC_PER_CORE
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    kg_shift,
  input  logic signed [KG_W-1:0]  kg_data,
  input  logic                    kg_update,
  input  logic                    boundary,
  input  logic [$clog2(NKG)-1:0]  sel,
  output logic signed [KG_W-1:0]  kg_out,
  output logic                    pending
);

  logic signed [KG_W-1:0] srl  [NKG];
  logic signed [KG_W-1:0] sync [NKG];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NKG; i++) begin srl[i] <= '0; sync[i] <= '0; end
      pending <= 1'b0;
    end else begin
      if (kg_shift) begin
        srl[0] <= kg_data;
        for (int i = 1; i < NKG; i++) srl[i] <= srl[i-1];
      end
      if ((pending || kg_update) && boundary) begin
        sync    <= srl;
        pending <= 1'b0;
      end else if (kg_update) begin
        pending <= 1'b1;
      end
    end
  end

  assign kg_out = sync[sel];

endmodule
