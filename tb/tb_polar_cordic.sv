// Testbench for polar_cordic: random vectors of all sizes and the four axis
// directions; magnitude must match sqrt(re^2 + im^2) and phase atan2(im, re)
// (in turns of 2^32) within the CORDIC's quantisation, one result per clock
// after ITER + 2 clocks.
module tb_polar_cordic;
  localparam int W = 32, ITER = 30;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                in_valid = 0, out_valid;
  logic [7:0]          tag_in = 0, tag_out;
  logic signed [W-1:0] re = 0, im = 0, mag, phase;

  polar_cordic #(.W(W), .ITER(ITER), .TAG_W(8)) dut (.clk, .rst, .in_valid, .tag_in, .re, .im,
                                                     .out_valid, .tag_out, .mag, .phase);

  real em [$], ep [$];
  int  et [$], tt [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    real m, p, dp, tolp; int tg, t;
    m = em.pop_front(); p = ep.pop_front(); tg = et.pop_front(); t = tt.pop_front();
    dp = real'(phase) - p;
    if (dp >  2147483648.0) dp -= 4294967296.0;
    if (dp < -2147483648.0) dp += 4294967296.0;
    // phase error grows as the vector gets short (quantised inputs)
    tolp = 64.0 + 4294967296.0 / (2.0 * PI) * (8.0 / (m + 1.0));
    check((real'(mag) - m) ** 2 <= (8.0 + 1e-6 * m) ** 2, $sformatf("mag %0d exp %f", mag, m));
    check(dp * dp <= tolp * tolp, $sformatf("phase %0d exp %f (re %0d)", phase, p, tg));
    check(int'(tag_out) == tg, "tag");
    check(cyc - t == ITER + 2, $sformatf("latency %0d", cyc - t));
  end

  task automatic push(input longint r, input longint i);
    real m;
    @(negedge clk);
    in_valid = 1; re = W'(r); im = W'(i); tag_in = 8'($urandom);
    m = $sqrt(real'(re) * real'(re) + real'(im) * real'(im));
    em.push_back(m > 2147483647.0 ? 2147483647.0 : m);
    ep.push_back($atan2(real'(im), real'(re)) / (2.0 * PI) * 4294967296.0);
    et.push_back(int'(tag_in)); tt.push_back(cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    push(1000000, 0); push(0, 1000000); push(-1000000, 0); push(0, -1000000);
    push(-1000000, 1);  push(-1000000, -1);
    for (int n = 0; n < 300; n++) begin
      automatic int sh = $urandom_range(0, 31);
      push(longint'($signed($urandom)) >>> sh, longint'($signed($urandom)) >>> sh);
    end
    push(2147483647, 2147483647);                  // saturated magnitude
    @(negedge clk) in_valid = 0;
    repeat (ITER + 5) @(posedge clk);
    check(em.size() == 0, "all results seen");
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
