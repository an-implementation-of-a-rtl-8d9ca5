// Testbench for ddc: a complex tone exactly at the NCO frequency must come
// out as a constant (I = A, Q = 0); a tone 100 MHz away must be strongly
// attenuated; reprogramming the CFIR to h[1] = 0.5 must halve the output.
// The output rate must be one eighth of the input rate.
module tb_ddc;
  import gfb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0]              ftw;
  logic                     cfir_we = 0;
  logic [5:0]               cfir_addr = 0;
  logic signed [CFIR_W-1:0] cfir_data = 0;
  logic                     in_valid = 0, out_valid;
  adc_iq_t                  in;
  ddc_iq_t                  out;

  ddc dut (.clk, .rst, .ftw, .cfir_we, .cfir_addr, .cfir_data, .in_valid, .in, .out_valid, .out);

  localparam real PI = 3.14159265358979323846;
  localparam real A  = 10000.0;
  int  nin = 0, nout = 0;
  real f_tone;           // tone frequency in cycles per input sample
  real exp_amp;          // expected output amplitude (< 0: only an upper bound)
  real bound;
  bit  checking = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    nout++;
    if (checking) begin
      if (exp_amp >= 0)
        check((real'(out.i) - exp_amp) ** 2 <= 100.0 && real'(out.q) ** 2 <= 100.0,
              $sformatf("ddc dc got %0d,%0d exp %f", out.i, out.q, exp_amp));
      else
        check(real'(out.i) ** 2 + real'(out.q) ** 2 <= bound * bound,
              $sformatf("ddc stopband got %0d,%0d", out.i, out.q));
    end
  end

  task automatic run(input int n, input int settle);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = 1;
      in.i = ADC_W'($rtoi($floor(A * $cos(2.0 * PI * f_tone * nin) + 0.5)));
      in.q = ADC_W'($rtoi($floor(A * $sin(2.0 * PI * f_tone * nin) + 0.5)));
      nin++;
      if (k == settle) checking = 1;
    end
    checking = 0;
  endtask

  initial begin
    ftw = 32'd37 << 22;
    f_tone = real'(ftw) / 4294967296.0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // 1) tone on the NCO frequency -> DC with (1 - 2^-17) gain
    exp_amp = A * (1.0 - 2.0 ** -17);
    run(1200, 200);
    // 2) tone 100 MHz (0.4 fs) away -> stop band
    f_tone = f_tone + 0.4;
    exp_amp = -1.0; bound = 0.02 * A;
    run(1200, 300);
    // 3) CFIR h[0] = 0, h[1] = 0.5, tone back on the NCO frequency
    f_tone = f_tone - 0.4;
    @(negedge clk) in_valid = 0; cfir_we = 1; cfir_addr = 0; cfir_data = 0;
    @(negedge clk) cfir_addr = 1; cfir_data = 18'sd65536;
    @(negedge clk) cfir_we = 0;
    exp_amp = A * 0.5;
    // a gap in the input breaks the 8-clock rhythm only between samples
    run(1200, 300);
    @(negedge clk) in_valid = 0;
    repeat (40) @(posedge clk);
    check(nout == nin / 8, $sformatf("rate: %0d outputs for %0d inputs", nout, nin));
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
