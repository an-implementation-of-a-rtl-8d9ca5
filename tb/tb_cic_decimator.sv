// Testbench for cic_decimator: random input, reference output computed as
// the convolution with the cascade of N_STAGES length-R boxcars, taken at
// every R-th input and divided by R^N_STAGES (floor). Checks the output count.
module tb_cic_decimator;
  localparam int R = 8, N = 3, W = 18;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                in_valid = 0, out_valid;
  logic signed [W-1:0] in, out;

  cic_decimator #(.R(R), .N_STAGES(N), .IN_W(W), .OUT_W(W)) dut (.clk, .rst, .in_valid, .in, .out_valid, .out);

  localparam int HL = N * (R - 1) + 1;
  longint h [HL];
  longint xs [$];
  longint expq [$];
  int nout = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    longint e;
    e = expq.pop_front();
    nout++;
    check(longint'(out) == e, $sformatf("cic got %0d exp %0d", out, e));
  end

  initial begin
    longint tmp [HL];
    // h = boxcar^N
    for (int k = 0; k < HL; k++) h[k] = (k < R) ? 1 : 0;
    for (int s = 1; s < N; s++) begin
      for (int k = 0; k < HL; k++) begin
        tmp[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) tmp[k] += h[k-j];
      end
      h = tmp;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 800; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in = (n < 400) ? W'($signed($urandom) >>> 14) : ((n % 2 != 0) ? W'(131071) : W'(-131072));
      if (in_valid) begin
        xs.push_back(longint'(in));
        if (xs.size() % R == 0) begin
          longint acc;
          acc = 0;
          // the pipelined integrators add a delay of N_STAGES-1 input samples
          for (int k = 0; k < HL; k++) if (xs.size() - N - k >= 0) acc += h[k] * xs[xs.size()-N-k];
          expq.push_back(acc >>> (3 * N));
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    check(nout == xs.size() / R && expq.size() == 0, $sformatf("output count %0d for %0d inputs", nout, xs.size()));
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
