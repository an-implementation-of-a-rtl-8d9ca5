// Control module: the microprocessor's register interface to the channelizer.
//
// Decodes single-word writes (reg_we, reg_addr, reg_wdata; map in gfb_pkg)
// into the configuration the other blocks need: enable, window length,
// arithmetic shift (asf), amplitude correction factor and output shift as
// registers; NCO tuning words per DDC; and one-clock write strobes with
// address and data for the CFIR taps, the window table, the kg shift
// registers of each GF core and the a/b/c/d coefficient RAMs of each X[k]
// unit. The paper names this module and says which settings are made by
// software; the bus, the register map and the reset values are this
// design's choice. Reset values: disabled, N = 256, asf = 9
// (= ceil(log2(4*256/pi))), ACF = 1.0 (Q1.17) and out_shift = 38, which
// leaves the results in units of the input LSB.
//
// Timing: every output changes one clock after the write.
module ctrl_regs
  import gfb_pkg::*;
#(
  parameter int NDDC      = 8,
  parameter int NCORE     = 16,
  parameter int NXK       = 2,
  parameter int WIN_MAX   = 1024,
  parameter int CFIR_TAPS = 64
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          reg_we,
  input  logic [15:0]                   reg_addr,
  input  logic [31:0]                   reg_wdata,
  output logic                          enable,
  output logic [$clog2(WIN_MAX):0]      win_size,
  output logic [3:0]                    asf,
  output logic [ACF_W-1:0]              acf,
  output logic [6:0]                    out_shift,
  output logic [31:0]                   ftw [NDDC],
  output logic                          cfir_we,
  output logic [$clog2(CFIR_TAPS)-1:0]  cfir_addr,
  output logic signed [CFIR_W-1:0]      cfir_data,
  output logic                          win_we,
  output logic [$clog2(WIN_MAX)-1:0]    win_addr,
  output logic signed [WIN_W-1:0]       win_data,
  output logic [NCORE-1:0]              kg_shift,
  output logic signed [KG_W-1:0]        kg_data,
  output logic                          kg_update,
  output logic [3:0]                    coef_we [NXK],
  output logic [$clog2(CORES_PER_XK*DDC_PER_CORE)-1:0] coef_addr,
  output logic [COEF_W-1:0]             coef_data
);

  localparam int BB = $clog2(CORES_PER_XK * DDC_PER_CORE);   // bin bits

  logic [15:0] off_nco, off_cfir, off_kg, off_win, off_coef;
  assign off_nco  = reg_addr - REG_NCO_BASE;
  assign off_cfir = reg_addr - REG_CFIR_BASE;
  assign off_kg   = reg_addr - REG_KG_BASE;
  assign off_win  = reg_addr - REG_WIN_BASE;
  assign off_coef = reg_addr - REG_COEF_BASE;

  always_ff @(posedge clk) begin
    if (rst) begin
      enable    <= 1'b0;
      win_size  <= ($clog2(WIN_MAX)+1)'(256);
      asf       <= 4'd9;
      acf       <= ACF_W'(1 << 17);
      out_shift <= 7'd38;
      for (int d = 0; d < NDDC; d++) ftw[d] <= '0;
      cfir_we <= 1'b0; win_we <= 1'b0; kg_shift <= '0; kg_update <= 1'b0;
      for (int u = 0; u < NXK; u++) coef_we[u] <= '0;
      cfir_addr <= '0; cfir_data <= '0; win_addr <= '0; win_data <= '0;
      kg_data <= '0; coef_addr <= '0; coef_data <= '0;
    end else begin
      cfir_we <= 1'b0; win_we <= 1'b0; kg_shift <= '0; kg_update <= 1'b0;
      for (int u = 0; u < NXK; u++) coef_we[u] <= '0;
      // data and address buses follow every write; strobes select the target
      cfir_addr <= off_cfir[$clog2(CFIR_TAPS)-1:0];
      cfir_data <= CFIR_W'(reg_wdata);
      win_addr  <= off_win[$clog2(WIN_MAX)-1:0];
      win_data  <= WIN_W'(reg_wdata);
      kg_data   <= KG_W'(reg_wdata);
      coef_addr <= off_coef[BB-1:0];
      coef_data <= COEF_W'(reg_wdata);
      if (reg_we) begin
        case (reg_addr)
          REG_CTRL:      enable    <= reg_wdata[0];
          REG_WIN_SIZE:  win_size  <= ($clog2(WIN_MAX)+1)'(reg_wdata);
          REG_ASF:       asf       <= reg_wdata[3:0];
          REG_ACF:       acf       <= ACF_W'(reg_wdata);
          REG_OUT_SHIFT: out_shift <= reg_wdata[6:0];
          REG_KG_UPDATE: kg_update <= 1'b1;
          default: begin
            if (reg_addr >= REG_NCO_BASE && off_nco < 16'(NDDC))
              ftw[off_nco[$clog2(NDDC)-1:0]] <= reg_wdata;
            if (reg_addr >= REG_CFIR_BASE && off_cfir < 16'(CFIR_TAPS))
              cfir_we <= 1'b1;
            if (reg_addr >= REG_KG_BASE && off_kg < 16'(NCORE))
              kg_shift[off_kg[$clog2(NCORE)-1:0]] <= 1'b1;
            if (reg_addr >= REG_WIN_BASE && off_win < 16'(WIN_MAX))
              win_we <= 1'b1;
            if (reg_addr >= REG_COEF_BASE && off_coef < 16'(NXK << (BB + 2)))
              coef_we[int'(off_coef) >> (BB + 2)] <= 4'b0001 << off_coef[BB+1:BB];
          end
        endcase
      end
    end
  end

endmodule
