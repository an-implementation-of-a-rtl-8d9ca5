// Goertzel filter bank channelizer, top level.
//
// A complex 250 MSPS stream from the ADC (16-bit I and Q, already decimated
// by 4 inside the converter) is split into NDDC coarse channels by the
// firmware DDCs (mixer, CIC by 8, CFIR), each delivering 31.25 MSPS. The
// common window unit weights the samples of all DDCs with w[n]. The fine
// channelization is done by NCORE GF cores: each takes 4 DDCs and computes
// one DFT bin per DDC component (4 complex bins) with a single time-shared
// Goertzel structure. DDCs are grouped in fours; the cores are spread evenly
// over the groups, so with the defaults cores 0-7 read DDCs 0-3 and cores
// 8-15 read DDCs 4-7, each DDC feeding 8 cores. Every CORES_PER_XK = 8 cores
// share one non-iterative X[k] unit, which turns the final Goertzel states
// into amplitude-corrected Re/Im (or magnitude/phase) once per window.
//
// Defaults follow the paper's main configuration: R = 8, 8 DDCs, 64 complex
// tones (16 cores, 2 X[k] units), windows up to 1024 samples (256 used in
// its measurements), 64-tap CFIR on 8 multipliers per component. The CIC
// order and all interfaces are this design's choices.
//
// Interface: adc_valid/adc_in must be continuous (one sample per clock)
// while enabled; reg_* is the control write port (map in gfb_pkg);
// res_valid/res of each X[k] unit carry one result per clock in bursts of
// 64 at the end of each window. Sticky status: gam_ovf (a Goertzel state
// saturated) per core, xk_overrun per unit; kg_pending while a kg update
// waits for a window boundary.
module gfb_top
  import gfb_pkg::*;
#(
  parameter int NDDC      = 8,
  parameter int NCORE     = 16,
  parameter int WIN_MAX   = 1024,
  parameter int CFIR_TAPS = 64,
  parameter int CIC_N     = 3,
  parameter bit POLAR     = 1'b0,
  localparam int NXK      = NCORE / CORES_PER_XK
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             adc_valid,
  input  adc_iq_t          adc_in,
  input  logic             reg_we,
  input  logic [15:0]      reg_addr,
  input  logic [31:0]      reg_wdata,
  output logic             res_valid [NXK],
  output xk_result_t       res       [NXK],
  output logic [NCORE-1:0] gam_ovf,
  output logic [NXK-1:0]   xk_overrun,
  output logic [NCORE-1:0] kg_pending
);

  localparam int NGROUP     = NDDC / DDC_PER_CORE;
  localparam int CORES_PER_G = NCORE / NGROUP;

  // ---------------- control ----------------
  logic                          enable;
  logic [$clog2(WIN_MAX):0]      win_size;
  logic [3:0]                    asf;
  logic [ACF_W-1:0]              acf;
  logic [6:0]                    out_shift;
  logic [31:0]                   ftw [NDDC];
  logic                          cfir_we;
  logic [$clog2(CFIR_TAPS)-1:0]  cfir_addr;
  logic signed [CFIR_W-1:0]      cfir_data;
  logic                          win_we;
  logic [$clog2(WIN_MAX)-1:0]    win_addr;
  logic signed [WIN_W-1:0]       win_data;
  logic [NCORE-1:0]              kg_shift;
  logic signed [KG_W-1:0]        kg_data;
  logic                          kg_update;
  logic [3:0]                    coef_we [NXK];
  logic [$clog2(CORES_PER_XK*DDC_PER_CORE)-1:0] coef_addr;
  logic [COEF_W-1:0]             coef_data;

  ctrl_regs #(.NDDC(NDDC), .NCORE(NCORE), .NXK(NXK), .WIN_MAX(WIN_MAX), .CFIR_TAPS(CFIR_TAPS)) u_ctrl (
    .clk, .rst, .reg_we, .reg_addr, .reg_wdata,
    .enable, .win_size, .asf, .acf, .out_shift, .ftw,
    .cfir_we, .cfir_addr, .cfir_data, .win_we, .win_addr, .win_data,
    .kg_shift, .kg_data, .kg_update, .coef_we, .coef_addr, .coef_data
  );

  // ---------------- DDCs ----------------
  logic    ddc_v [NDDC];
  ddc_iq_t ddc_o [NDDC];

  for (genvar d = 0; d < NDDC; d++) begin : g_ddc
    ddc #(.CIC_N(CIC_N), .CFIR_TAPS(CFIR_TAPS), .CFIR_NMAC(CFIR_TAPS / R_DEC)) u_ddc (
      .clk, .rst, .ftw(ftw[d]), .cfir_we, .cfir_addr, .cfir_data,
      .in_valid(adc_valid), .in(adc_in), .out_valid(ddc_v[d]), .out(ddc_o[d])
    );
  end

  // ---------------- window ----------------
  logic    w_valid, w_first, w_last;
  ddc_iq_t w_out [NDDC];

  window_function #(.NDDC(NDDC), .WIN_MAX(WIN_MAX)) u_win (
    .clk, .rst, .enable, .win_size, .win_we, .win_addr, .win_data,
    .in_valid(ddc_v[0]), .in(ddc_o), .out_valid(w_valid), .out_first(w_first), .out_last(w_last),
    .out(w_out)
  );

  // ---------------- GF cores ----------------
  logic                   c_res_v    [NCORE];
  logic [$clog2(TDM)-1:0] c_res_slot [NCORE];
  logic signed [GF_W-1:0] c_res_w1   [NCORE];
  logic signed [GF_W-1:0] c_res_w2   [NCORE];
  logic [NCORE-1:0]       c_ovf;

  for (genvar c = 0; c < NCORE; c++) begin : g_core
    localparam int G = c / CORES_PER_G;
    ddc_iq_t core_in [DDC_PER_CORE];
    for (genvar j = 0; j < DDC_PER_CORE; j++) begin : g_in
      assign core_in[j] = w_out[G * DDC_PER_CORE + j];
    end
    gf_core u_core (
      .clk, .rst, .asf, .kg_shift(kg_shift[c]), .kg_data, .kg_update,
      .in_valid(w_valid), .in_first(w_first), .in_last(w_last), .in(core_in),
      .res_valid(c_res_v[c]), .res_slot(c_res_slot[c]), .res_w1(c_res_w1[c]), .res_w2(c_res_w2[c]),
      .ovf(c_ovf[c]), .kg_pending(kg_pending[c])
    );
  end

  // ---------------- non-iterative X[k] units ----------------
  logic [NXK-1:0] u_overrun;

  for (genvar u = 0; u < NXK; u++) begin : g_xk
    logic                   v_in  [CORES_PER_XK];
    logic [$clog2(TDM)-1:0] s_in  [CORES_PER_XK];
    logic signed [GF_W-1:0] w1_in [CORES_PER_XK];
    logic signed [GF_W-1:0] w2_in [CORES_PER_XK];
    for (genvar j = 0; j < CORES_PER_XK; j++) begin : g_map
      assign v_in[j]  = c_res_v[u * CORES_PER_XK + j];
      assign s_in[j]  = c_res_slot[u * CORES_PER_XK + j];
      assign w1_in[j] = c_res_w1[u * CORES_PER_XK + j];
      assign w2_in[j] = c_res_w2[u * CORES_PER_XK + j];
    end
    xk_calc #(.NCORE(CORES_PER_XK), .POLAR(POLAR)) u_xk (
      .clk, .rst, .coef_we(coef_we[u]), .coef_addr, .coef_data, .acf, .out_shift,
      .res_valid(v_in), .res_slot(s_in), .res_w1(w1_in), .res_w2(w2_in),
      .out_valid(res_valid[u]), .out(res[u]), .overrun(u_overrun[u])
    );
  end

  // ---------------- sticky status ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      gam_ovf <= '0; xk_overrun <= '0;
    end else begin
      gam_ovf    <= gam_ovf | c_ovf;
      xk_overrun <= xk_overrun | u_overrun;
    end
  end

endmodule
