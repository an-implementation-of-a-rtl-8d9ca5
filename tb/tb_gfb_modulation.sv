// Channelizer under amplitude + phase modulation, full default size.
//
// This is the read-out case of a flux-ramp modulated resonator. Each of the
// 8 DDCs carries one carrier on an exact bin k_d. Its amplitude is
//   1 + mu cos(2 pi fs t + phi(t)),  mu = 0.3, fs = 30 kHz,
// where the 30 kHz term stands for the sensor response and phi(t) is a
// 60 degree phase modulation at 200 Hz. DDC d uses PM shape d mod 3:
// sinusoidal, triangular or square. The run covers one full 200 Hz period,
// which is 5 ms of signal or about 615 windows of N = 256 with a
// rectangular window.
//
// Two levels are checked:
// - Per window. |X_I + j X_Q| of the carrier bin (core 3 of the DDC's
//   group) must equal A * H_cic * sum(envelope over the window) * ACF,
//   within 2 % of A.
// - After the run. The result stream of each DDC is demodulated as the
//   host software would: remove the mean, mix with exp(-j 2 pi fs t), then
//   take a 59-result moving average. 59 results span about 29 periods of
//   the 60 kHz image, so the average cancels it. The phase recovered from
//   the hardware results must follow the phase recovered from the model's
//   window sums within 1.5 degree after a constant offset is removed. That
//   offset comes from the DDC delay, which the model ignores. The
//   peak-to-peak swing of the recovered phase must come out near the
//   120 degree of the modulation.
//
// The demodulation method and the modulation values follow the source's
// experiment. The carrier level, the bin plan and the tolerances are this
// testbench's own. A failure is counted if any part did not run.
module tb_gfb_modulation;
  import gfb_pkg::*;

  localparam int NDDC = 8, NCORE = 16, NXK = 2, N = 256;
  localparam real A = 3000.0;
  localparam real PI = 3.14159265358979323846;
  localparam int ACF_F = 22;
  localparam real FS_SIG = 30.0e3;      // sensor tone
  localparam real FPM = 200.0;          // phase modulation rate
  localparam real PM_DEG = 60.0;        // phase modulation depth
  localparam real MU = 0.3;
  localparam int NW = 620;              // windows recorded
  localparam int SKIP = 4;              // first windows discarded
  localparam int L = 59;                // moving average length

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic        adc_valid = 0;
  adc_iq_t     adc_in = '0;
  logic        reg_we = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0;
  logic        res_valid [NXK];
  xk_result_t  res       [NXK];
  logic [NCORE-1:0] gam_ovf, kg_pending;
  logic [NXK-1:0]   xk_overrun;

  gfb_top dut (.clk, .rst, .adc_valid, .adc_in, .reg_we, .reg_addr, .reg_wdata,
               .res_valid, .res, .gam_ovf, .xk_overrun, .kg_pending);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk) reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk) reg_we = 0;
  endtask

  function automatic int kd(input int d);
    return 8 + 7 * d;
  endfunction

  function automatic int q16(input real v);
    return $rtoi(v * 65536.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  // phase modulation of DDC d at ADC sample n, in radians
  function automatic real pm(input int d, input longint n);
    real x, s;
    x = FPM * real'(n) / 250.0e6;
    case (d % 3)
      0:       s = $sin(2.0 * PI * x);
      1:       s = 2.0 / PI * $asin($sin(2.0 * PI * x));
      default: s = ($sin(2.0 * PI * x) >= 0.0) ? 1.0 : -1.0;
    endcase
    return PM_DEG / 180.0 * PI * s;
  endfunction

  function automatic real env(input int d, input longint n);
    return 1.0 + MU * $cos(2.0 * PI * FS_SIG * real'(n) / 250.0e6 + pm(d, n));
  endfunction

  // ---------------- stimulus ----------------
  real    ph [NDDC];
  longint n_adc = 0;
  initial for (int d = 0; d < NDDC; d++) ph[d] = 0.1 * d;

  always @(negedge clk) begin
    real si, sq, e;
    si = 0.0; sq = 0.0;
    for (int d = 0; d < NDDC; d++) begin
      e = env(d, n_adc);
      si += A * e * $cos(2.0 * PI * ph[d]);
      sq += A * e * $sin(2.0 * PI * ph[d]);
      ph[d] = ph[d] + real'(2 * d - 7) / 16.0 + real'(kd(d)) / 2048.0;
      ph[d] = ph[d] - $floor(ph[d]);
    end
    adc_valid <= !rst;
    adc_in.i  <= 16'($rtoi(si + (si >= 0 ? 0.5 : -0.5)));
    adc_in.q  <= 16'($rtoi(sq + (sq >= 0 ? 0.5 : -0.5)));
    if (!rst) n_adc <= n_adc + 1;
  end

  // ADC sample index at the start of each window
  longint win_start [$];
  always @(posedge clk) if (!rst && dut.u_win.out_first && dut.u_win.out_valid) win_start.push_back(n_adc);

  // ---------------- results ----------------
  // carrier-bin magnitude per DDC and burst; core 3 of each unit holds k_d
  real    mag [NDDC][NW];
  longint cre [NXK][8], cim [NXK][8];
  int     nres [NXK], bursts [NXK];

  for (genvar u = 0; u < NXK; u++) begin : g_mon
    always @(posedge clk) begin
      if (rst) begin
        nres[u] = 0; bursts[u] = 0;
      end else if (res_valid[u]) begin
        if (res[u].core[2:0] == 3'd3) begin
          cre[u][res[u].slot] = longint'(res[u].re);
          cim[u][res[u].slot] = longint'(res[u].im);
        end
        if (nres[u] == 63) begin
          if (bursts[u] < NW)
            for (int dl = 0; dl < 4; dl++) begin
              real xr, xi;
              xr = real'(cre[u][2*dl]) - real'(cim[u][2*dl+1]);
              xi = real'(cim[u][2*dl]) + real'(cre[u][2*dl+1]);
              mag[u * 4 + dl][bursts[u]] = $sqrt(xr * xr + xi * xi);
            end
          nres[u] = 0; bursts[u] = bursts[u] + 1;
        end else nres[u] = nres[u] + 1;
      end
    end
  end

  function automatic real hcic(input real kbin);
    real f, h;
    f = kbin / (N * R_DEC);
    h = $sin(PI * R_DEC * f) / (R_DEC * $sin(PI * f));
    return h * h * h * (131071.0 / 131072.0);
  endfunction

  // software I/Q demodulation of a result series: phase in degrees
  task automatic demod(input real y [NW], input longint t0 [NW], output real psi [NW]);
    real mean, zr [NW], zi [NW], ar, ai, t;
    mean = 0.0;
    for (int w = SKIP; w < NW; w++) mean += y[w];
    mean = mean / (NW - SKIP);
    for (int w = SKIP; w < NW; w++) begin
      t = 2.0 * PI * FS_SIG * real'(t0[w]) / 250.0e6;
      zr[w] =  (y[w] - mean) * $cos(t);
      zi[w] = -(y[w] - mean) * $sin(t);
    end
    for (int w = SKIP + L - 1; w < NW; w++) begin
      ar = 0.0; ai = 0.0;
      for (int i = 0; i < L; i++) begin ar += zr[w - i]; ai += zi[w - i]; end
      psi[w] = $atan2(ai, ar) * 180.0 / PI;
    end
  endtask

  function automatic real wrap180(input real a);
    real r;
    r = a;
    while (r >  180.0) r -= 360.0;
    while (r < -180.0) r += 360.0;
    return r;
  endfunction

  int n_win_checks = 0, n_demod = 0;

  // ---------------- sequence ----------------
  initial begin
    real wsum, scale;
    real ym [NW], ye [NW], pm_m [NW], pm_e [NW];
    longint t0 [NW];
    repeat (10) @(posedge clk);
    rst <= 0;
    for (int d = 0; d < NDDC; d++) wr(REG_NCO_BASE + 16'(d), 32'((2 * d - 7) * (1 << 28)));
    wr(REG_WIN_SIZE, N);
    wr(REG_ASF, 9);
    wr(REG_OUT_SHIFT, 14 - 9 + 16 + ACF_F);
    for (int c = 0; c < NCORE; c++) begin
      int u, j;
      real al, be, cf [4];
      u = c / 8; j = c % 8;
      for (int dl = 3; dl >= 0; dl--)
        wr(REG_KG_BASE + 16'(c), 32'(q16(2.0 * $cos(2.0 * PI * (kd(u * 4 + dl) - 3 + j) / N))));
      for (int dl = 0; dl < 4; dl++) begin
        int k;
        k = kd(u * 4 + dl) - 3 + j;
        al = 2.0 * PI * k / N;
        be = 2.0 * PI * k * (N - 1) / N;
        cf[0] = $cos(be);
        cf[1] = -$sin(be);
        cf[2] = $sin(al) * $sin(be) - $cos(al) * $cos(be);
        cf[3] = $sin(2.0 * PI * k);
        for (int sel = 0; sel < 4; sel++)
          wr(REG_COEF_BASE + 16'((u << 7) | (sel << 5) | (j << 2) | dl), 32'(q16(cf[sel]) & 32'h3FFFF));
      end
    end
    wr(REG_KG_UPDATE, 0);
    for (int n = 0; n < N; n++) wr(REG_WIN_BASE + 16'(n), 32'(1 << 16));
    wsum = real'(N);
    wr(REG_ACF, 32'($rtoi(2.0 ** ACF_F / wsum + 0.5)));
    scale = real'($rtoi(2.0 ** ACF_F / wsum + 0.5)) / (2.0 ** ACF_F);
    wr(REG_CTRL, 1);

    // the modulation runs from the first ADC sample; the first SKIP windows
    // are discarded
    wait (bursts[0] >= NW && bursts[1] >= NW);
    @(negedge clk);
    check(win_start.size() >= NW, "window starts recorded");

    for (int d = 0; d < NDDC; d++) begin
      real pp_max, pp_min, off, dev, dmax;
      int nd;
      // per-window magnitude against the model
      for (int w = 0; w < NW; w++) begin
        real s;
        longint n0;
        n0 = win_start[w];
        t0[w] = n0;
        s = 0.0;
        for (int n = 0; n < N; n++) s += env(d, n0 + 8 * n);
        ye[w] = A * hcic(real'(kd(d))) * s * scale;
        ym[w] = mag[d][w];
        if (w >= SKIP) begin
          check((ym[w] - ye[w]) ** 2 <= (0.02 * A) ** 2,
                $sformatf("ddc %0d window %0d: |X| = %f expected %f", d, w, ym[w], ye[w]));
          n_win_checks++;
        end
      end
      // demodulated phase, hardware against model
      demod(ym, t0, pm_m);
      demod(ye, t0, pm_e);
      off = 0.0; nd = 0;
      for (int w = SKIP + L; w < NW; w++) begin off += wrap180(pm_m[w] - pm_e[w]); nd++; end
      off = off / nd;
      pp_max = -1000.0; pp_min = 1000.0; dmax = 0.0;
      for (int w = SKIP + L; w < NW; w++) begin
        real rel;
        dev = wrap180(pm_m[w] - pm_e[w] - off);
        if (dev * dev > dmax * dmax) dmax = (dev > 0) ? dev : -dev;
        check(dev * dev <= 1.5 ** 2, $sformatf("ddc %0d window %0d: demodulated phase off by %f deg", d, w, dev));
        rel = wrap180(pm_m[w] - pm_m[SKIP + L]);
        if (rel > pp_max) pp_max = rel;
        if (rel < pp_min) pp_min = rel;
        n_demod++;
      end
      $display("ddc %0d (PM shape %0d): recovered phase swing %f deg, largest deviation from model %f deg",
               d, d % 3, pp_max - pp_min, dmax);
      check(pp_max - pp_min > 100.0 && pp_max - pp_min < 125.0,
            $sformatf("ddc %0d: phase swing %f deg, expected about 120", d, pp_max - pp_min));
    end

    check(gam_ovf == '0 && xk_overrun == '0, "no saturation or overrun");
    $display("mechanisms: window_checks=%0d demodulated_points=%0d", n_win_checks, n_demod);
    check(n_win_checks > 0, "window magnitudes checked");
    check(n_demod > 0, "demodulation checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #7000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
