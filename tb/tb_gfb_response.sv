// Channelizer frequency response and AM demodulation, full default size.
//
// Frequency response: for each of three windows (rectangular, 5-term
// flat-top, Dolph-Chebyshev with 100 dB side lobes, all with N = 256 and
// computed here) every DDC carries one tone at k_d + delta bins, with delta
// stepped over 0, 0.3, 0.5, 0.8. The 8 cores of a DDC group sit on bins
// k_d - 3 .. k_d + 4, so each window samples the filter response at 8
// offsets per DDC. The measured |X_I + j X_Q| must equal
//   A * |H_cic(f)| * |sum_n w[n] exp(-j 2 pi (k - f) n / N)| * ACF
// within 1 % plus 0.3 % of A. ACF is set to 1/sum(w) for each window, so the
// tone bin reads the tone amplitude whatever the window.
//
// AM demodulation: a tone on an exact bin with envelope 1 + 0.3 cos(2 pi fm t)
// (fm = 20 kHz, inside the 100 Hz - 50 kHz range of modulating signals
// of the source), rectangular window; each window's result must follow the
// window average of the envelope within 2 % of A, so the sequence of results
// is the demodulated signal at 122 kHz.
//
// Polar mode: a second instance built with POLAR = 1 receives the same
// input and register writes; each of its results must carry the magnitude
// and phase of the matching Cartesian result (within 4 LSB, and for results
// above 200 LSB within 0.2 degree).
//
// After every change of window, ACF or tone one window is discarded (it
// mixes old and new settings). A failure is counted for any part that
// never ran.
module tb_gfb_response;
  import gfb_pkg::*;

  localparam int NDDC = 8, NCORE = 16, NXK = 2, N = 256;
  localparam real A = 3000.0;
  localparam real PI = 3.14159265358979323846;
  localparam int ACF_F = 22;                   // fractional bits of ACF

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

  logic             p_res_valid [NXK];
  xk_result_t       p_res       [NXK];
  logic [NCORE-1:0] p_gam_ovf, p_kg_pending;
  logic [NXK-1:0]   p_xk_overrun;

  gfb_top #(.POLAR(1'b1)) dut_p (.clk, .rst, .adc_valid, .adc_in, .reg_we, .reg_addr, .reg_wdata,
               .res_valid(p_res_valid), .res(p_res), .gam_ovf(p_gam_ovf), .xk_overrun(p_xk_overrun),
               .kg_pending(p_kg_pending));

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

  // ---------------- stimulus ----------------
  real    delta = 0.0;        // tone offset in bins
  real    am_mu = 0.0;        // AM depth
  real    am_f  = 20.0e3;     // AM frequency
  real    ph [NDDC];
  longint n_adc = 0;
  initial for (int d = 0; d < NDDC; d++) ph[d] = 0.1 * d;

  always @(negedge clk) begin
    real si, sq, env;
    si = 0.0; sq = 0.0;
    env = 1.0 + am_mu * $cos(2.0 * PI * am_f * real'(n_adc) / 250.0e6);
    for (int d = 0; d < NDDC; d++) begin
      si += A * env * $cos(2.0 * PI * ph[d]);
      sq += A * env * $sin(2.0 * PI * ph[d]);
      ph[d] = ph[d] + real'(2 * d - 7) / 16.0 + (real'(kd(d)) + delta) / 2048.0;
      ph[d] = ph[d] - $floor(ph[d]);
    end
    adc_valid <= !rst;
    adc_in.i  <= 16'($rtoi(si + (si >= 0 ? 0.5 : -0.5)));
    adc_in.q  <= 16'($rtoi(sq + (sq >= 0 ? 0.5 : -0.5)));
    if (!rst) n_adc <= n_adc + 1;
  end

  // ADC sample index at the start of each window (for the AM reference)
  longint win_start [$];
  always @(posedge clk) if (!rst && dut.u_win.out_first && dut.u_win.out_valid) win_start.push_back(n_adc);

  // ---------------- windows ----------------
  real wq [N];                // quantized window in use
  real wsum;
  int  acf_reg;

  function automatic real cheb_t(input int m, input real x);
    if (x > 1.0)       return  $cosh(m * $acosh(x));
    else if (x < -1.0) return ((m % 2 != 0) ? -1.0 : 1.0) * $cosh(m * $acosh(-x));
    else               return  $cos(m * $acos(x));
  endfunction

  task automatic load_window(input int kind);
    real w [N];
    real mx, beta, p [N], wf [N/2+1];
    case (kind)
      0: for (int n = 0; n < N; n++) w[n] = 1.0;
      1: for (int n = 0; n < N; n++) begin
           real t;
           t = 2.0 * PI * n / (N - 1);
           w[n] = 0.21557895 - 0.41663158 * $cos(t) + 0.277263158 * $cos(2 * t)
                - 0.083578947 * $cos(3 * t) + 0.006947368 * $cos(4 * t);
         end
      default: begin
        // Dolph-Chebyshev, even length: frequency samples of T_{N-1}, inverse DFT
        beta = $cosh($acosh(10.0 ** (100.0 / 20.0)) / (N - 1));
        for (int k = 0; k < N; k++) p[k] = cheb_t(N - 1, beta * $cos(PI * k / N));
        for (int m = 1; m <= N / 2; m++) begin
          wf[m] = 0.0;
          for (int k = 0; k < N; k++) wf[m] += p[k] * $cos(PI * k * (1 - 2 * m) / N);
        end
        for (int n = 0; n < N / 2; n++) w[n] = wf[N / 2 - n];
        for (int n = N / 2; n < N; n++) w[n] = wf[n - N / 2 + 1];
        mx = 0.0;
        for (int n = 0; n < N; n++) if (w[n] > mx) mx = w[n];
        for (int n = 0; n < N; n++) w[n] = w[n] / mx;
      end
    endcase
    wsum = 0.0;
    for (int n = 0; n < N; n++) begin
      wq[n] = real'(q16(w[n])) / 65536.0;
      wsum += wq[n];
      wr(REG_WIN_BASE + 16'(n), 32'(q16(w[n]) & 32'h3FFFF));
    end
    acf_reg = $rtoi(2.0 ** ACF_F / wsum + 0.5);
    wr(REG_ACF, 32'(acf_reg));
  endtask

  // |sum_n w[n] exp(-j 2 pi off n / N)|
  function automatic real wresp(input real off);
    real re, im;
    re = 0.0; im = 0.0;
    for (int n = 0; n < N; n++) begin
      re += wq[n] * $cos(2.0 * PI * off * n / N);
      im -= wq[n] * $sin(2.0 * PI * off * n / N);
    end
    return $sqrt(re * re + im * im);
  endfunction

  function automatic real hcic(input real kbin);
    real f, h;
    f = kbin / (N * R_DEC);
    h = $sin(PI * R_DEC * f) / (R_DEC * $sin(PI * f));
    return h * h * h * (131071.0 / 131072.0);
  endfunction

  // ---------------- results ----------------
  localparam int MAXB = 128;
  longint rre [NXK][MAXB][8][8];
  longint rim [NXK][MAXB][8][8];
  int     nres   [NXK];
  int     bursts [NXK];

  for (genvar u = 0; u < NXK; u++) begin : g_mon
    always @(posedge clk) begin
      if (rst) begin
        nres[u] <= 0; bursts[u] <= 0;
      end else if (res_valid[u]) begin
        if (bursts[u] < MAXB) begin
          rre[u][bursts[u]][res[u].core[2:0]][res[u].slot] <= longint'(res[u].re);
          rim[u][bursts[u]][res[u].core[2:0]][res[u].slot] <= longint'(res[u].im);
        end
        if (nres[u] == 63) begin nres[u] <= 0; bursts[u] <= bursts[u] + 1; end
        else nres[u] <= nres[u] + 1;
      end
    end
  end

  longint pmg [NXK][MAXB][8][8];
  longint pph [NXK][MAXB][8][8];
  int     p_nres   [NXK];
  int     p_bursts [NXK];

  for (genvar u = 0; u < NXK; u++) begin : g_pmon
    always @(posedge clk) begin
      if (rst) begin
        p_nres[u] <= 0; p_bursts[u] <= 0;
      end else if (p_res_valid[u]) begin
        if (p_bursts[u] < MAXB) begin
          pmg[u][p_bursts[u]][p_res[u].core[2:0]][p_res[u].slot] <= longint'(p_res[u].re);
          pph[u][p_bursts[u]][p_res[u].core[2:0]][p_res[u].slot] <= longint'(p_res[u].im);
        end
        if (p_nres[u] == 63) begin p_nres[u] <= 0; p_bursts[u] <= p_bursts[u] + 1; end
        else p_nres[u] <= p_nres[u] + 1;
      end
    end
  end

  int n_polar = 0;

  // every result of burst b: polar instance against the Cartesian one
  task automatic check_polar(input int b);
    real re, im, m, p, dp;
    wait (p_bursts[0] > b && p_bursts[1] > b);
    @(negedge clk);
    for (int u = 0; u < NXK; u++)
      for (int j = 0; j < 8; j++)
        for (int s = 0; s < 8; s++) begin
          re = real'(rre[u][b][j][s]);
          im = real'(rim[u][b][j][s]);
          m  = $sqrt(re * re + im * im);
          check((real'(pmg[u][b][j][s]) - m) ** 2 <= (4.0 + 1e-6 * m) ** 2,
                $sformatf("polar burst %0d unit %0d core %0d slot %0d: mag %0d expected %f", b, u, j, s, pmg[u][b][j][s], m));
          if (m > 200.0) begin
            p  = $atan2(im, re) / (2.0 * PI) * 4294967296.0;
            dp = real'(pph[u][b][j][s]) - p;
            while (dp >  2147483648.0) dp -= 4294967296.0;
            while (dp < -2147483648.0) dp += 4294967296.0;
            check(dp * dp <= (0.2 / 360.0 * 4294967296.0) ** 2,
                  $sformatf("polar burst %0d unit %0d core %0d slot %0d: phase %0d expected %f", b, u, j, s, pph[u][b][j][s], p));
          end
          n_polar++;
        end
  endtask

  function automatic real mag_of(input int u, input int b, input int j, input int dl);
    real xr, xi;
    xr = real'(rre[u][b][j][2*dl]) - real'(rim[u][b][j][2*dl+1]);
    xi = real'(rim[u][b][j][2*dl]) + real'(rre[u][b][j][2*dl+1]);
    return $sqrt(xr * xr + xi * xi);
  endfunction

  task automatic wait_burst(input int b);
    wait (bursts[0] > b && bursts[1] > b);
    @(negedge clk);
  endtask

  int n_resp = 0, n_windows_types = 0, n_am = 0;
  real max_err = 0.0;

  task automatic check_response(input int b, input int kind);
    real m, e, off;
    int  d, k;
    for (int u = 0; u < NXK; u++)
      for (int j = 0; j < 8; j++)
        for (int dl = 0; dl < 4; dl++) begin
          d = u * 4 + dl;
          k = kd(d) - 3 + j;
          off = real'(k) - (real'(kd(d)) + delta);
          m = mag_of(u, b, j, dl);
          e = A * hcic(real'(kd(d)) + delta) * wresp(off) * real'(acf_reg) / (2.0 ** ACF_F);
          if ((m - e) ** 2 > max_err ** 2) max_err = (m > e) ? m - e : e - m;
          check((m - e) ** 2 <= (0.01 * e + 0.003 * A) ** 2,
                $sformatf("window %0d delta %f ddc %0d bin %0d: |X| = %f expected %f", kind, delta, d, k, m, e));
          n_resp++;
        end
  endtask

  // ---------------- sequence ----------------
  initial begin
    int b;
    real ds [4] = '{0.0, 0.3, 0.5, 0.8};
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
    load_window(0);
    wr(REG_CTRL, 1);
    b = 0;

    // frequency response for three windows
    for (int kind = 0; kind < 3; kind++) begin
      if (kind != 0) load_window(kind);
      for (int s = 0; s < 4; s++) begin
        delta = ds[s];
        wait_burst(b + 1);                  // window b+1 mixes settings
        wait_burst(b + 2);
        check_response(b + 2, kind);
        if (s == 1) check_polar(b + 2);
        b = b + 2;
      end
      n_windows_types++;
      $display("window %0d: sum(w) = %f, ACF = %0d, largest |X| error so far %f LSB", kind, wsum, acf_reg, max_err);
    end

    // AM demodulation, rectangular window, tones on exact bins
    load_window(0);
    delta = 0.0;
    am_mu = 0.3;                            // 8 tones x 1.3 A stay below ADC full scale
    wait_burst(b + 1);
    wait_burst(b + 2);
    b = b + 2;
    for (int w = b; w < b + 8; w++) begin
      real envm, e, m;
      longint n0;
      wait_burst(w);
      // window w starts at ADC sample win_start[w]; the DDC pipeline delay
      // (about 30 ADC samples) is not subtracted: 0.1 us against 50 us of fm
      n0 = win_start[w];
      envm = 0.0;
      for (int n = 0; n < N; n++)
        envm += 1.0 + am_mu * $cos(2.0 * PI * am_f * real'(n0 + 8 * n) / 250.0e6);
      envm = envm / N;
      for (int u = 0; u < NXK; u++)
        for (int dl = 0; dl < 4; dl++) begin
          m = mag_of(u, w, 3, dl);          // core 3 holds the tone bin k_d
          e = A * hcic(real'(kd(u * 4 + dl))) * envm * wsum * real'(acf_reg) / (2.0 ** ACF_F);
          check((m - e) ** 2 <= (0.02 * A) ** 2, $sformatf("AM window %0d ddc %0d: |X| = %f expected %f", w, u * 4 + dl, m, e));
          n_am++;
        end
    end

    check_polar(b + 7);
    check(gam_ovf == '0 && xk_overrun == '0, "no saturation or overrun");
    check(p_gam_ovf == gam_ovf && p_xk_overrun == xk_overrun, "polar instance status");
    $display("mechanisms: window_types=%0d response_points=%0d am_points=%0d polar_points=%0d", n_windows_types, n_resp, n_am, n_polar);
    check(n_polar > 0, "polar mode checked");
    check(n_windows_types == 3, "all window types ran");
    check(n_resp > 0, "response checked");
    check(n_am > 0, "AM demodulation checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
