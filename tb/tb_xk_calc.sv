// Testbench for xk_calc, in Cartesian and in polar mode side by side.
// Random final states of 8 cores x 8 slots and random a/b/c/d/ACF: every
// result must equal ((a*w1 + c*w2) * acf) >>> out_shift (and b, d for the
// imaginary part), saturated, in core/slot order on 64 consecutive clocks;
// the polar unit must give the magnitude and phase of the same values. A
// batch arriving while the previous one is processed must raise overrun and
// be dropped.
module tb_xk_calc;
  import gfb_pkg::*;
  localparam int NC = CORES_PER_XK;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]             coef_we = 0;
  logic [4:0]             coef_addr = 0;
  logic [COEF_W-1:0]      coef_data = 0;
  logic [ACF_W-1:0]       acf = 0;
  logic [6:0]             out_shift = 20;
  logic                   res_valid [NC];
  logic [2:0]             res_slot [NC];
  logic signed [GF_W-1:0] res_w1 [NC], res_w2 [NC];
  logic                   c_valid, p_valid, c_overrun, p_overrun;
  xk_result_t             c_out, p_out;

  xk_calc #(.NCORE(NC), .POLAR(1'b0)) dut_c (.clk, .rst, .coef_we, .coef_addr, .coef_data, .acf, .out_shift,
    .res_valid, .res_slot, .res_w1, .res_w2, .out_valid(c_valid), .out(c_out), .overrun(c_overrun));
  xk_calc #(.NCORE(NC), .POLAR(1'b1)) dut_p (.clk, .rst, .coef_we, .coef_addr, .coef_data, .acf, .out_shift,
    .res_valid, .res_slot, .res_w1, .res_w2, .out_valid(p_valid), .out(p_out), .overrun(p_overrun));

  longint ca [32], cb [32], cc [32], cd [32];
  longint er [$], ei [$];
  int     ecore [$], eslot [$];
  real    pm [$], pp [$];
  int     ncart = 0, npol = 0, novr = 0, t_batch = 0, cyc = 0, t_first = -1, last_c = -1;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint sat32(input longint v);
    longint hi = (64'sd1 <<< 31) - 1, lo = -(64'sd1 <<< 31);
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction

  always @(posedge clk) if (!rst) begin
    if (c_overrun) novr++;
    if (c_valid) begin
      longint r, i; int c, s;
      r = er.pop_front(); i = ei.pop_front(); c = ecore.pop_front(); s = eslot.pop_front();
      check(longint'(c_out.re) == r && longint'(c_out.im) == i && int'(c_out.core) == c && int'(c_out.slot) == s,
            $sformatf("core %0d slot %0d got %0d %0d exp %0d %0d", c, s, c_out.re, c_out.im, r, i));
      if (s == 0 && c == 0) check(cyc - t_batch == 5, $sformatf("first result after %0d clocks", cyc - t_batch));
      if (last_c >= 0) check(cyc == last_c + 1 || (c == 0 && s == 0), "results back to back");
      last_c = cyc;
      ncart++;
    end
    if (p_valid) begin
      real m, p, dp;
      m = pm.pop_front(); p = pp.pop_front();
      dp = real'(p_out.im) - p;
      if (dp >  2147483648.0) dp -= 4294967296.0;
      if (dp < -2147483648.0) dp += 4294967296.0;
      check((real'(p_out.re) - m) ** 2 <= (8.0 + 1e-6 * m) ** 2, $sformatf("polar mag %0d exp %f", p_out.re, m));
      check(dp * dp <= (64.0 + 4294967296.0 / (2.0 * PI) * 8.0 / (m + 1.0)) ** 2, "polar phase");
      npol++;
    end
  end

  task automatic batch(input bit expect_drop);
    longint w1 [NC][TDM], w2 [NC][TDM];
    for (int c = 0; c < NC; c++)
      for (int s = 0; s < TDM; s++) begin
        w1[c][s] = longint'($signed($urandom)) >>> ((c == 7) ? 6 : 8);
        w2[c][s] = longint'($signed($urandom)) >>> ((c == 7) ? 6 : 8);
      end
    for (int s = 0; s < TDM; s++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        res_valid[c] = 1; res_slot[c] = 3'(s);
        res_w1[c] = GF_W'(w1[c][s]); res_w2[c] = GF_W'(w2[c][s]);
      end
    end
    t_batch = cyc + 1;
    @(negedge clk);
    for (int c = 0; c < NC; c++) res_valid[c] = 0;
    if (!expect_drop)
      for (int c = 0; c < NC; c++)
        for (int s = 0; s < TDM; s++) begin
          int b = c * 4 + s / 2;
          longint r, i; real rr, ii;
          r = sat32(((ca[b] * w1[c][s] + cc[b] * w2[c][s]) * longint'(acf)) >>> out_shift);
          i = sat32(((cb[b] * w1[c][s] + cd[b] * w2[c][s]) * longint'(acf)) >>> out_shift);
          er.push_back(r); ei.push_back(i); ecore.push_back(c); eslot.push_back(s);
          rr = real'(r); ii = real'(i);
          pm.push_back($sqrt(rr * rr + ii * ii) > 2147483647.0 ? 2147483647.0 : $sqrt(rr * rr + ii * ii));
          pp.push_back($atan2(ii, rr) / (2.0 * PI) * 4294967296.0);
        end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin res_valid[c] = 0; res_slot[c] = 0; res_w1[c] = 0; res_w2[c] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < 32; b++)
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        coef_we = 4'b0001 << k; coef_addr = 5'(b); coef_data = COEF_W'($urandom);
        case (k)
          0: ca[b] = longint'($signed(coef_data));
          1: cb[b] = longint'($signed(coef_data));
          2: cc[b] = longint'($signed(coef_data));
          default: cd[b] = longint'($signed(coef_data));
        endcase
      end
    @(negedge clk) coef_we = 0;
    acf = 18'($urandom_range(1000, 262143));
    batch(0);
    repeat (20) @(negedge clk);
    batch(1);                                      // arrives while busy: dropped
    repeat (100) @(negedge clk);
    check(novr == 1, $sformatf("overrun pulses %0d", novr));
    out_shift = 9;                                 // larger results, some saturate
    batch(0);
    repeat (150) @(negedge clk);
    check(ncart == 128 && npol == 128 && er.size() == 0 && pm.size() == 0,
          $sformatf("counts %0d %0d", ncart, npol));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
