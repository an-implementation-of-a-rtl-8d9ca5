// Testbench for cfir: the pass-through reset state, then random taps and
// samples every 8 clocks (plus some longer gaps); outputs are compared with
// a direct-form convolution rounded to the output width, and the latency of
// TAPS/NMAC + 2 clocks is checked.
module tb_cfir;
  import gfb_pkg::*;
  localparam int TAPS = 64, NMAC = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                     coef_we = 0;
  logic [5:0]               coef_addr;
  logic signed [CFIR_W-1:0] coef_data;
  logic                     in_valid = 0, out_valid;
  logic signed [DDC_W-1:0]  in, out;

  cfir #(.TAPS(TAPS), .NMAC(NMAC)) dut (.clk, .rst, .coef_we, .coef_addr, .coef_data, .in_valid, .in, .out_valid, .out);

  longint h [TAPS];
  longint xs [$];
  longint expq [$];
  int     tq [$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    longint e; int t;
    e = expq.pop_front(); t = tq.pop_front();
    check(longint'(out) == e, $sformatf("fir got %0d exp %0d", out, e));
    check(cyc - t == TAPS / NMAC + 2, $sformatf("latency %0d", cyc - t));
  end

  task automatic push(input longint x);
    longint acc = 0, hi = 131071, lo = -131072;
    @(negedge clk);
    in_valid = 1; in = DDC_W'(x);
    xs.push_back(x);
    for (int k = 0; k < TAPS; k++) if (xs.size() - 1 - k >= 0) acc += h[k] * xs[xs.size()-1-k];
    acc = (acc + (1 <<< 16)) >>> 17;
    expq.push_back(acc > hi ? hi : (acc < lo ? lo : acc));
    tq.push_back(cyc);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    for (int k = 0; k < TAPS; k++) h[k] = (k == 0) ? 131071 : 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // pass-through after reset
    for (int n = 0; n < 8; n++) begin push(longint'($signed(18'($urandom)))); repeat (6) @(negedge clk); end
    // random taps
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk);
      coef_we = 1; coef_addr = 6'(k); coef_data = CFIR_W'($signed($urandom) >>> 17);
      h[k] = longint'(coef_data);
    end
    @(negedge clk) coef_we = 0;
    for (int n = 0; n < 150; n++) begin
      push((n > 120) ? ((n % 2 != 0) ? 131071 : -131072) : longint'($signed(18'($urandom))));
      repeat ((n % 17 == 0) ? 12 : 6) @(negedge clk);
    end
    // full-scale same-sign input drives the sum into saturation
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk); coef_we = 1; coef_addr = 6'(k); coef_data = 18'sd100000; h[k] = 100000;
    end
    @(negedge clk) coef_we = 0;
    for (int n = 0; n < 70; n++) begin push(131071); repeat (6) @(negedge clk); end
    repeat (20) @(posedge clk);
    check(expq.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
