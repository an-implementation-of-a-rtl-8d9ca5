// Non-iterative section: X[k] calculation mapping with amplitude correction.
//
// At the end of every window each of the NCORE GF cores it serves delivers
// the final (w1, w2) of its 8 real streams (one per clock, all cores
// together). They are captured, then processed one stream per clock:
//   re = a*w1 + c*w2,  im = b*w1 + d*w2        (Algorithm 1, real input)
//   out = (re, im) * ACF >>> out_shift, saturated to 32 bits,
// where a, b, c, d of the stream's bin come from four coefficient RAMs
// written by software, and ACF = 1/sum(w[n]) corrects the window's coherent
// gain. With POLAR = 1 (a synthesis-time choice, as in the paper) the
// corrected result is converted to magnitude and phase.
//
// The four RAMs are addressed by bin = {core, ddc}; the I and Q streams of a
// DDC share a bin and thus its coefficients, and the two real-input results
// are delivered separately (the complex bin is X_I + j*X_Q, formed by
// software). The capture buffer is single: processing takes 64 + 5 clocks
// and must end before the next window's results arrive, i.e. windows longer
// than 9 samples; otherwise the old batch is kept and overrun pulses.
//
// The core field of the result is 4 bits wide, its top bit stays 0 with 8
// cores per unit.
//
// Scaling: with states stored as w*2^(XF-asf), coefficients with COEF_FRAC
// and ACF with f fractional bits, out = X * ACF * 2^(XF - asf + COEF_FRAC +
// f - out_shift) in units of the input LSB.
module xk_calc
  import gfb_pkg::*;
#(
  parameter int NCORE = CORES_PER_XK,
  parameter bit POLAR = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [3:0]              coef_we,      // one-hot: a, b, c, d
  input  logic [$clog2(NCORE*DDC_PER_CORE)-1:0] coef_addr,
  input  logic [COEF_W-1:0]       coef_data,
  input  logic [ACF_W-1:0]        acf,          // unsigned
  input  logic [6:0]              out_shift,
  input  logic                    res_valid [NCORE],
  input  logic [$clog2(TDM)-1:0]  res_slot  [NCORE],
  input  logic signed [GF_W-1:0]  res_w1    [NCORE],
  input  logic signed [GF_W-1:0]  res_w2    [NCORE],
  output logic                    out_valid,
  output xk_result_t              out,
  output logic                    overrun
);

  localparam int SB   = $clog2(TDM);
  localparam int CB   = (NCORE > 1) ? $clog2(NCORE) : 1;
  localparam int NB   = NCORE * DDC_PER_CORE;
  localparam int BB   = $clog2(NB);
  localparam int NS   = NCORE * TDM;
  localparam int IB   = $clog2(NS);
  localparam int PW   = GF_W + COEF_W;          // product width
  localparam int SW   = PW + 1;                 // sum width
  localparam int AW   = SW + ACF_W + 1;         // after ACF

  // ---------------- capture ----------------
  logic signed [GF_W-1:0] cap_w1 [NCORE][TDM];
  logic signed [GF_W-1:0] cap_w2 [NCORE][TDM];
  logic                   busy, start;
  logic [IB-1:0]          idx;

  always_ff @(posedge clk) begin
    for (int c = 0; c < NCORE; c++)
      if (res_valid[c] && !busy) begin
        cap_w1[c][res_slot[c]] <= res_w1[c];
        cap_w2[c][res_slot[c]] <= res_w2[c];
      end
  end

  assign start = res_valid[0] && res_slot[0] == SB'(TDM - 1) && !busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; idx <= '0; overrun <= 1'b0;
    end else begin
      overrun <= res_valid[0] && res_slot[0] == SB'(TDM - 1) && busy;
      if (start) begin
        busy <= 1'b1; idx <= '0;
      end else if (busy) begin
        idx <= idx + 1'b1;
        if (idx == IB'(NS - 1)) busy <= 1'b0;
      end
    end
  end

  // ---------------- processing pipeline ----------------
  // p1: RAM read and state read
  logic [BB-1:0] raddr;
  logic [COEF_W-1:0] ca, cb, cc, cd;
  assign raddr = BB'({idx[IB-1:SB], idx[SB-1:1]});   // {core, ddc}

  coef_ram #(.DEPTH(NB), .W(COEF_W)) u_ram_a (.clk, .we(coef_we[0]), .waddr(coef_addr), .wdata(coef_data), .raddr, .rdata(ca));
  coef_ram #(.DEPTH(NB), .W(COEF_W)) u_ram_b (.clk, .we(coef_we[1]), .waddr(coef_addr), .wdata(coef_data), .raddr, .rdata(cb));
  coef_ram #(.DEPTH(NB), .W(COEF_W)) u_ram_c (.clk, .we(coef_we[2]), .waddr(coef_addr), .wdata(coef_data), .raddr, .rdata(cc));
  coef_ram #(.DEPTH(NB), .W(COEF_W)) u_ram_d (.clk, .we(coef_we[3]), .waddr(coef_addr), .wdata(coef_data), .raddr, .rdata(cd));

  logic signed [GF_W-1:0] w1_1, w2_1;
  logic [IB-1:0]          id1, id2, id3, id4;
  logic [4:0]             v;
  logic signed [PW-1:0]   aw1, cw2, bw1, dw2;
  logic signed [SW-1:0]   re3, im3;
  logic signed [AW-1:0]   re4, im4;
  logic signed [GF_W-1:0] re5, im5;
  logic [CB+SB-1:0]       id5;

  always_ff @(posedge clk) begin
    w1_1 <= cap_w1[idx[IB-1:SB]][idx[SB-1:0]];
    w2_1 <= cap_w2[idx[IB-1:SB]][idx[SB-1:0]];
    id1  <= idx;
    // p2: products
    aw1 <= $signed(ca) * w1_1;
    cw2 <= $signed(cc) * w2_1;
    bw1 <= $signed(cb) * w1_1;
    dw2 <= $signed(cd) * w2_1;
    id2 <= id1;
    // p3: sums
    re3 <= SW'(aw1) + SW'(cw2);
    im3 <= SW'(bw1) + SW'(dw2);
    id3 <= id2;
    // p4: amplitude correction
    re4 <= re3 * $signed({1'b0, acf});
    im4 <= im3 * $signed({1'b0, acf});
    id4 <= id3;
    // p5: output scaling
    re5 <= GF_W'(sat(128'(re4 >>> out_shift), GF_W));
    im5 <= GF_W'(sat(128'(im4 >>> out_shift), GF_W));
    id5 <= (CB+SB)'(id4);
  end

  always_ff @(posedge clk) begin
    if (rst) v <= '0;
    else     v <= {v[3:0], busy};
  end

  // ---------------- output mode ----------------
  if (POLAR) begin : g_polar
    logic [CB+SB-1:0] tag_o;
    logic signed [GF_W-1:0] mag, ph;
    polar_cordic #(.W(GF_W), .ITER(30), .TAG_W(CB + SB)) u_polar (
      .clk, .rst, .in_valid(v[4]), .tag_in(id5), .re(re5), .im(im5),
      .out_valid, .tag_out(tag_o), .mag, .phase(ph)
    );
    always_comb begin
      out      = '0;
      out.core = 4'(tag_o[CB+SB-1:SB]);
      out.slot = tag_o[SB-1:0];
      out.re   = mag;
      out.im   = ph;
    end
  end else begin : g_cart
    assign out_valid = v[4];
    always_comb begin
      out      = '0;
      out.core = 4'(id5[CB+SB-1:SB]);
      out.slot = id5[SB-1:0];
      out.re   = re5;
      out.im   = im5;
    end
  end

  // All cores of a unit run in lock step.
  for (genvar c = 1; c < NCORE; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (rst) res_valid[c] == res_valid[0])
      else $error("xk_calc: core %0d out of step", c);
  end

endmodule
