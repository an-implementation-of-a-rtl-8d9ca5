// Testbench for nco_mixer: random complex samples and tuning words; each
// output is compared with (I + jQ) * exp(-j*phi) computed in floating point
// from the table phase the NCO must be at, and the 4-clock latency is checked.
module tb_nco_mixer;
  import gfb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] ftw;
  logic        in_valid = 0, out_valid;
  adc_iq_t     in;
  ddc_iq_t     out;

  nco_mixer dut (.clk, .rst, .ftw, .in_valid, .in, .out_valid, .out);

  localparam real PI = 3.14159265358979323846;
  real exp_i [$], exp_q [$];
  int  in_t [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    real ei, eq; int t;
    ei = exp_i.pop_front(); eq = exp_q.pop_front(); t = in_t.pop_front();
    check((real'(out.i) - ei) ** 2 <= 9.0 && (real'(out.q) - eq) ** 2 <= 9.0,
          $sformatf("mix got %0d,%0d exp %f,%f", out.i, out.q, ei, eq));
    check(cyc - t == 4, $sformatf("latency %0d", cyc - t));
  end

  initial begin
    logic [31:0] ph;
    real p;
    ftw = 32'h1234_5678;
    repeat (3) @(posedge clk);
    rst <= 0;
    ph = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n == 300) ftw = 32'h9000_0001;   // retune while running
      in_valid = ($urandom_range(0, 3) != 0);
      in.i = 16'($urandom); in.q = 16'($urandom);
      if (in_valid) begin
        p = 2.0 * PI * real'(ph[31:22]) / 1024.0;
        exp_i.push_back(real'(in.i) * $cos(p) + real'(in.q) * $sin(p));
        exp_q.push_back(real'(in.q) * $cos(p) - real'(in.i) * $sin(p));
        in_t.push_back(cyc);
        ph = ph + ftw;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    check(exp_i.size() == 0, "all samples came out");
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
