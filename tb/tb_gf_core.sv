// Testbench for gf_core: windows of 16 samples from 4 DDCs, one sample
// every 8 clocks. For every window and TDM slot the final (w1, w2) must match
// a floating-point Goertzel recursion with the slot's kg; results must come
// on 8 consecutive clocks, 4 clocks after the last sample. A kg update
// requested inside a window must wait for the window end, and saturation of
// the state must raise ovf.
module tb_gf_core;
  import gfb_pkg::*;
  localparam int N = 16;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]             asf = 4;
  logic                   kg_shift = 0, kg_update = 0;
  logic signed [KG_W-1:0] kg_data = 0;
  logic                   in_valid = 0, in_first = 0, in_last = 0;
  ddc_iq_t                in [DDC_PER_CORE];
  logic                   res_valid, ovf, kg_pending;
  logic [2:0]             res_slot;
  logic signed [GF_W-1:0] res_w1, res_w2;

  gf_core dut (.clk, .rst, .asf, .kg_shift, .kg_data, .kg_update, .in_valid, .in_first, .in_last,
               .in, .res_valid, .res_slot, .res_w1, .res_w2, .ovf, .kg_pending);

  real    kgr [DDC_PER_CORE];          // kg in use
  real    wf1 [TDM], wf2 [TDM];
  real    e1 [$], e2 [$];
  int     eslot [$];
  int     cyc = 0, t_last = 0, nres = 0, novf = 0, res_run = 0;
  bit     check_values = 1;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (ovf) novf++;
    if (res_valid) begin
      real a, b, sc; int s;
      a = e1.pop_front(); b = e2.pop_front(); s = eslot.pop_front();
      sc = $pow(2.0, real'(int'(asf) - 14));
      if (check_values) begin
        check(int'(res_slot) == s, $sformatf("slot %0d exp %0d", res_slot, s));
        check((real'(res_w1) * sc - a) ** 2 < 1.0 + (1e-5 * a) ** 2 &&
              (real'(res_w2) * sc - b) ** 2 < 1.0 + (1e-5 * b) ** 2,
              $sformatf("slot %0d got %f %f exp %f %f", s, real'(res_w1) * sc, real'(res_w2) * sc, a, b));
        if (s == 0) check(cyc - t_last == 4, $sformatf("result delay %0d", cyc - t_last));
      end
      nres++;
    end
  end

  task automatic load_kg(input int k [DDC_PER_CORE]);
    for (int s = DDC_PER_CORE - 1; s >= 0; s--) begin
      @(negedge clk);
      kg_shift = 1;
      kg_data = KG_W'($rtoi($floor(2.0 * $cos(2.0 * PI * k[s] / N) * 65536.0 + 0.5)));
    end
    @(negedge clk) kg_shift = 0; kg_update = 1;
    @(negedge clk) kg_update = 0;
  endtask

  function automatic real kg_of(input int k);
    return real'($rtoi($floor(2.0 * $cos(2.0 * PI * k / N) * 65536.0 + 0.5))) / 65536.0;
  endfunction

  // one window; amp sets the input size
  task automatic window(input real amp, input int new_k [DDC_PER_CORE], input bit retune);
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      in_valid = 1; in_first = (n == 0); in_last = (n == N - 1);
      for (int d = 0; d < DDC_PER_CORE; d++) begin
        in[d].i = DDC_W'($rtoi(amp * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0)));
        in[d].q = DDC_W'($rtoi(amp * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0)));
      end
      for (int s = 0; s < TDM; s++) begin
        real x, w0;
        x = (s % 2 != 0) ? real'(in[s/2].q) : real'(in[s/2].i);
        if (n == 0) begin wf1[s] = 0; wf2[s] = 0; end
        w0 = x + kgr[s/2] * wf1[s] - wf2[s];
        wf2[s] = wf1[s]; wf1[s] = w0;
      end
      if (n == N - 1) begin
        for (int s = 0; s < TDM; s++) begin e1.push_back(wf1[s]); e2.push_back(wf2[s]); eslot.push_back(s); end
        t_last = cyc;
      end
      @(negedge clk) in_valid = 0;
      if (retune && n == 2) begin
        // kg writes fall between samples; update waits for the window end
        fork load_kg(new_k); join_none
      end
      if (retune && n == 10) check(kg_pending == 1'b1, "update pending inside the window");
      repeat (6) @(negedge clk);
    end
  endtask

  initial begin
    automatic int k0 [DDC_PER_CORE] = '{1, 3, 6, 13};
    automatic int k1 [DDC_PER_CORE] = '{2, 5, 7, 11};
    automatic int k2 [DDC_PER_CORE] = '{0, 8, 4, 15};
    repeat (3) @(posedge clk);
    rst <= 0;
    load_kg(k0);
    for (int d = 0; d < DDC_PER_CORE; d++) kgr[d] = kg_of(k0[d]);
    repeat (4) @(negedge clk);
    window(30000.0, k0, 0);
    window(130000.0, k1, 1);       // retune requested inside
    repeat (3) @(negedge clk);
    check(kg_pending == 1'b0, "update applied at the window end");
    for (int d = 0; d < DDC_PER_CORE; d++) kgr[d] = kg_of(k1[d]);
    window(60000.0, k1, 0);
    window(1000.0, k1, 0);
    check(novf == 0, "no saturation with asf = 4");
    // 5) kg = 2 (bin 0) and asf = 0 saturate a full-scale input
    repeat (20) @(negedge clk);
    asf = 0;
    load_kg(k2);
    for (int d = 0; d < DDC_PER_CORE; d++) kgr[d] = kg_of(k2[d]);
    check_values = 0;
    window(131000.0, k2, 0);
    repeat (20) @(negedge clk);
    check(novf > 0, "saturation flagged");
    check(nres == 5 * TDM, $sformatf("%0d results", nres));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
