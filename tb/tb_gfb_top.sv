// End-to-end testbench of the channelizer at its full default size
// (8 DDCs, 16 GF cores, 2 X[k] units, windows up to 1024, N = 256 used).
//
// Stimulus: a continuous 250 MSPS complex ADC stream holding one tone per
// DDC, A = 3000 LSB each. DDC d is centred at (d - 3.5) * 31.25 MHz and its
// tone sits k_d = 5 + 7d kb (bin = 31.25 MHz / 256) above the centre, so
// after the DDC it is an exact DFT bin of a 256-sample window. Core j of a
// group is programmed for kb k_d + 3j, so core 0 and 8 hold the tones and
// the others hold empty kb. kg = 2cos(2 pi k/N) and the X[k] coefficients
// a, b, c, d (Algorithm 1) are computed here with real arithmetic; ACF is
// 1/N, so the combined complex bin X_I + j X_Q of a tone bin should equal
// A times the CIC droop at the tone frequency (CFIR left as a pass-through).
//
// Mechanisms exercised and counted:
//   windows   result bursts of both X[k] units, 2048 clocks apart (the
//             31.25 MSPS / 256 result rate, checked in clocks)
//   tones     tone kb within 2 % of the expected magnitude, empty kb
//             below 1 % of A
//   retune    kg of cores 1 and 9 changed while running: pending until the
//             window boundary, then the cores hold the tone kb
//   overflow  asf = 0 saturates the Goertzel states (sticky gam_ovf)
//   overrun   8-sample windows arrive faster than an X[k] unit drains its
//             64 results (sticky xk_overrun)
module tb_gfb_top;
  import gfb_pkg::*;

  localparam int NDDC = 8, NCORE = 16, NXK = 2, N = 256;
  localparam real A = 3000.0;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
    return 5 + 7 * d;
  endfunction

  // ---------------- ADC stimulus ----------------
  // tone of DDC d: (2d-7)/16 + k_d/2048 cycles per ADC sample; period 2048
  longint n_adc = 0;
  always @(negedge clk) begin
    real si, sq, ph;
    si = 0.0; sq = 0.0;
    for (int d = 0; d < NDDC; d++) begin
      ph = 2.0 * PI * (real'((2 * d - 7) * 128 + kd(d)) * real'(n_adc % 2048) / 2048.0 + 0.1 * d);
      si += A * $cos(ph);
      sq += A * $sin(ph);
    end
    adc_valid <= !rst;
    adc_in.i  <= 16'($rtoi(si + (si >= 0 ? 0.5 : -0.5)));
    adc_in.q  <= 16'($rtoi(sq + (sq >= 0 ? 0.5 : -0.5)));
    if (!rst) n_adc <= n_adc + 1;
  end

  // ---------------- bin programming ----------------
  function automatic int q16(input real v);
    return $rtoi(v * 65536.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  task automatic prog_kg(input int core, input int kb [4]);
    // the word written last ends in kg slot 0 (DDC 0 of the core)
    for (int dl = 3; dl >= 0; dl--)
      wr(REG_KG_BASE + 16'(core), 32'(q16(2.0 * $cos(2.0 * PI * kb[dl] / N))));
  endtask

  task automatic prog_coef(input int core, input int kb [4]);
    int u, j;
    real al, be, cf [4];
    u = core / 8; j = core % 8;
    for (int dl = 0; dl < 4; dl++) begin
      al = 2.0 * PI * kb[dl] / N;
      be = 2.0 * PI * kb[dl] * (N - 1) / N;
      cf[0] = $cos(be);
      cf[1] = -$sin(be);
      cf[2] = $sin(al) * $sin(be) - $cos(al) * $cos(be);
      cf[3] = $sin(2.0 * PI * kb[dl]);
      for (int sel = 0; sel < 4; sel++)
        wr(REG_COEF_BASE + 16'((u << 7) | (sel << 5) | (j << 2) | dl), 32'(q16(cf[sel]) & 32'h3FFFF));
    end
  endtask

  // bin_of[core][dl] that the X[k] stage should see in a given burst
  int bin_now [NCORE][4];

  function automatic void set_bins(input int core, input int shift);
    for (int dl = 0; dl < 4; dl++) bin_now[core][dl] = (kd((core / 8) * 4 + dl) + 3 * shift) % N;
  endfunction

  // ---------------- result monitor ----------------
  localparam int MAXB = 64;
  longint rre [NXK][MAXB][8][8];
  longint rim [NXK][MAXB][8][8];
  int     nres   [NXK];
  int     bursts [NXK];
  longint first_cyc [NXK][MAXB];

  for (genvar u = 0; u < NXK; u++) begin : g_mon
    always @(posedge clk) begin
      if (rst) begin
        nres[u] <= 0; bursts[u] <= 0;
      end else if (res_valid[u]) begin
        if (bursts[u] < MAXB) begin
          rre[u][bursts[u]][res[u].core[2:0]][res[u].slot] <= longint'(res[u].re);
          rim[u][bursts[u]][res[u].core[2:0]][res[u].slot] <= longint'(res[u].im);
          if (nres[u] == 0) first_cyc[u][bursts[u]] <= cyc;
        end
        if (nres[u] == 63) begin nres[u] <= 0; bursts[u] <= bursts[u] + 1; end
        else nres[u] <= nres[u] + 1;
      end
    end
  end

  // ---------------- burst check ----------------
  int n_tone = 0, n_empty = 0;

  task automatic check_burst(input int b);
    real xr, xi, mag, f, h, expm;
    int  d, core;
    for (int u = 0; u < NXK; u++)
      for (int j = 0; j < 8; j++)
        for (int dl = 0; dl < 4; dl++) begin
          core = u * 8 + j;
          d = u * 4 + dl;
          xr = real'(rre[u][b][j][2*dl]) - real'(rim[u][b][j][2*dl+1]);
          xi = real'(rim[u][b][j][2*dl]) + real'(rre[u][b][j][2*dl+1]);
          mag = $sqrt(xr * xr + xi * xi);
          if (bin_now[core][dl] == kd(d)) begin
            f = real'(kd(d)) / (N * R_DEC);          // cycles per ADC sample
            h = $sin(PI * R_DEC * f) / (R_DEC * $sin(PI * f));
            expm = A * h * h * h * (131071.0 / 131072.0);
            check(mag > 0.98 * expm && mag < 1.02 * expm,
                  $sformatf("burst %0d core %0d ddc %0d tone |X| = %f expected %f", b, core, d, mag, expm));
            n_tone++;
          end else begin
            check(mag < 0.01 * A, $sformatf("burst %0d core %0d ddc %0d empty bin |X| = %f", b, core, d, mag));
            n_empty++;
          end
        end
  endtask

  task automatic wait_burst(input int b);
    wait (bursts[0] > b && bursts[1] > b);
    @(negedge clk);
  endtask

  // ---------------- sequence ----------------
  int n_windows = 0, n_rate = 0, n_retune = 0, n_ovf = 0, n_overrun = 0;

  initial begin
    int kb [4];
    int b0;
    repeat (10) @(posedge clk);
    rst <= 0;
    check(kg_pending == '0 && gam_ovf == '0 && xk_overrun == '0, "status after reset");
    for (int d = 0; d < NDDC; d++) wr(REG_NCO_BASE + 16'(d), 32'((2 * d - 7) * (1 << 28)));
    for (int n = 0; n < N; n++) wr(REG_WIN_BASE + 16'(n), 32'(65536));
    wr(REG_WIN_SIZE, N);
    wr(REG_ASF, 9);
    wr(REG_ACF, 131072);                    // 1/N with 25 fractional bits
    wr(REG_OUT_SHIFT, 46);                  // 14 - 9 + 16 + 25 - 46 = 0
    for (int c = 0; c < NCORE; c++) begin
      set_bins(c, c % 8);
      kb = bin_now[c];
      prog_kg(c, kb);
      prog_coef(c, kb);
    end
    wr(REG_KG_UPDATE, 0);
    repeat (3) @(negedge clk);
    check(kg_pending == '0, "kg update applied at once while idle");
    repeat (200) @(negedge clk);
    wr(REG_CTRL, 1);

    // windows 0..2 with the initial kb (window 0 is not checked)
    wait_burst(2);
    for (int b = 1; b <= 2; b++) check_burst(b);
    for (int u = 0; u < NXK; u++) begin
      check(first_cyc[u][2] - first_cyc[u][1] == 8 * N, $sformatf("unit %0d result period %0d", u, first_cyc[u][2] - first_cyc[u][1]));
      n_rate++;
    end

    // retune cores 1 and 9 to the tone kb during window 3
    for (int c = 1; c < NCORE; c += 8) begin
      int nb [4];
      for (int dl = 0; dl < 4; dl++) nb[dl] = kd((c / 8) * 4 + dl);
      prog_kg(c, nb);
    end
    wr(REG_KG_UPDATE, 0);
    repeat (2) @(negedge clk);
    check(kg_pending == '1, "kg update pending inside a window");
    wait (kg_pending == '0);
    @(negedge clk);
    check(bursts[0] == 3 && nres[0] == 0, "pending cleared at the window boundary before the results");
    n_retune++;
    wait_burst(3);
    check_burst(3);                         // window 3 still used the old kg
    for (int c = 1; c < NCORE; c += 8) begin
      int nb [4];
      set_bins(c, 0);
      nb = bin_now[c];
      prog_coef(c, nb);
    end
    wait_burst(4);
    check_burst(4);                         // cores 1 and 9 now hold the tones
    check(gam_ovf == '0 && xk_overrun == '0, "no overflow or overrun in normal operation");
    for (int u = 0; u < NXK; u++) begin
      check(first_cyc[u][4] - first_cyc[u][3] == 8 * N, "result period after retune");
      n_rate++;
    end

    // Goertzel state overflow: asf = 0 for one window
    @(posedge dut.u_win.out_first);
    wr(REG_ASF, 0);
    wait_burst(6);
    check(gam_ovf[0] && gam_ovf[8], "state saturation flagged on the tone cores");
    if (gam_ovf != 0) n_ovf++;
    wr(REG_ASF, 9);

    // X[k] overrun: 8-sample windows (64 clocks) against 64+5 clocks of work
    @(posedge dut.u_win.out_first);
    wr(REG_WIN_SIZE, 8);
    b0 = bursts[0];
    repeat (40 * 64) @(negedge clk);
    check(xk_overrun == '1, "overrun flagged with 8-sample windows");
    if (xk_overrun != 0) n_overrun++;
    check(bursts[0] - b0 > 10 && bursts[0] - b0 < 40, $sformatf("bursts with short windows: %0d", bursts[0] - b0));

    n_windows = bursts[0] + bursts[1];
    $display("mechanisms: windows=%0d rate=%0d tone_bins=%0d empty_bins=%0d retune=%0d overflow=%0d overrun=%0d",
             n_windows, n_rate, n_tone, n_empty, n_retune, n_ovf, n_overrun);
    check(n_windows > 0, "windows happened");
    check(n_rate > 0, "rate checked");
    check(n_tone > 0, "tone kb checked");
    check(n_empty > 0, "empty kb checked");
    check(n_retune > 0, "kg retune happened");
    check(n_ovf > 0, "state overflow happened");
    check(n_overrun > 0, "X[k] overrun happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
