// Testbench for window_function: random window table and DDC samples; the
// outputs must equal round(x * w[n] / 2^16) with n cycling over win_size,
// with first/last marking the window ends; disabling restarts at n = 0.
module tb_window_function;
  import gfb_pkg::*;
  localparam int NDDC = 3, WIN_MAX = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                    enable = 0;
  logic [4:0]              win_size = 5;
  logic                    win_we = 0;
  logic [3:0]              win_addr = 0;
  logic signed [WIN_W-1:0] win_data = 0;
  logic                    in_valid = 0, out_valid, out_first, out_last;
  ddc_iq_t                 in [NDDC], out [NDDC];

  window_function #(.NDDC(NDDC), .WIN_MAX(WIN_MAX)) dut (
    .clk, .rst, .enable, .win_size, .win_we, .win_addr, .win_data,
    .in_valid, .in, .out_valid, .out_first, .out_last, .out);

  longint w [WIN_MAX];
  int     n = 0, nexp = 0;
  longint ei [NDDC][$];
  longint eq [NDDC][$];
  bit     ef [$], el [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint wmul(input longint x, input longint c);
    longint p = (x * c + 32768) >>> 16;
    return p > 131071 ? 131071 : (p < -131072 ? -131072 : p);
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    longint xi, xq; bit f, l;
    f = ef.pop_front(); l = el.pop_front();
    for (int d = 0; d < NDDC; d++) begin
      xi = ei[d].pop_front(); xq = eq[d].pop_front();
      check(longint'(out[d].i) == xi && longint'(out[d].q) == xq,
            $sformatf("ddc %0d got %0d,%0d exp %0d,%0d", d, out[d].i, out[d].q, xi, xq));
    end
    check(out_first == f && out_last == l, "first/last marks");
  end

  task automatic sample();
    longint xi [NDDC], xq [NDDC];
    @(negedge clk);
    in_valid = 1;
    for (int d = 0; d < NDDC; d++) begin
      in[d].i = DDC_W'($urandom); in[d].q = DDC_W'($urandom);
      xi[d] = wmul(longint'(in[d].i), w[n]); xq[d] = wmul(longint'(in[d].q), w[n]);
    end
    if (enable) begin
      for (int d = 0; d < NDDC; d++) begin ei[d].push_back(xi[d]); eq[d].push_back(xq[d]); end
      ef.push_back(n == 0); el.push_back(n == int'(win_size) - 1);
      n = (n == int'(win_size) - 1) ? 0 : n + 1;
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < WIN_MAX; k++) begin
      @(negedge clk);
      win_we = 1; win_addr = 4'(k); win_data = WIN_W'($urandom);
      if (k == 2) win_data = 18'sd131071;          // large coefficient: saturation
      w[k] = longint'(win_data);
    end
    @(negedge clk) win_we = 0;
    sample();                                      // disabled: no output
    enable = 1;
    repeat (13) sample();
    enable = 0; n = 0;
    repeat (2) sample();
    enable = 1; win_size = 16;
    repeat (20) sample();
    repeat (5) @(posedge clk);
    check(ei[0].size() == 0, "all outputs seen");
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
