// Testbench for goertzel_mapping.
// 1) Random operands every clock (asf changed every 50 operations): each result must equal
//    floor((floor(kg*w1*2^asf / 2^16) + x*2^14 - w2*2^asf) / 2^asf), saturated
//    to 32 bits with ovf set on saturation, w2_out = w1, 3 clocks later.
// 2) A Goertzel recursion over a 64-sample tone, fed back through the
//    testbench, must track a floating-point recursion.
module tb_goertzel_mapping;
  import gfb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0]              asf = 0;
  logic                    in_valid = 0, out_valid, ovf;
  logic [3:0]              tag_in = 0, tag_out;
  logic signed [DDC_W-1:0] x = 0;
  logic signed [GF_W-1:0]  w1 = 0, w2 = 0, w1_out, w2_out;
  logic signed [KG_W-1:0]  kg = 0;

  goertzel_mapping #(.TAG_W(4)) dut (.clk, .rst, .asf, .in_valid, .tag_in, .x, .w1, .w2, .kg,
                                     .out_valid, .tag_out, .w1_out, .w2_out, .ovf);

  longint e_w1 [$], e_w2 [$];
  bit     e_ovf [$];
  int     e_tag [$], e_t [$];
  int     cyc = 0, novf = 0;
  bit     mode_random = 1;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst && out_valid && mode_random) begin
    longint a, b; bit o; int tg, t;
    a = e_w1.pop_front(); b = e_w2.pop_front(); o = e_ovf.pop_front(); tg = e_tag.pop_front(); t = e_t.pop_front();
    check(longint'(w1_out) == a && longint'(w2_out) == b && ovf == o && int'(tag_out) == tg,
          $sformatf("got %0d %0d ovf %0d, exp %0d %0d ovf %0d", w1_out, w2_out, ovf, a, b, o));
    check(cyc - t == 3, $sformatf("latency %0d", cyc - t));
    if (ovf) novf++;
  end

  initial begin
    localparam real PI = 3.14159265358979323846;
    longint full, st, hi, lo;
    real wf1, wf2, wf0, kgr, scale;
    hi = (64'sd1 <<< 31) - 1; lo = -(64'sd1 <<< 31);
    repeat (3) @(posedge clk);
    rst <= 0;
    // 1) random operands
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n % 50 == 0) begin
        // asf is a static setting: change it only while the pipeline is empty
        in_valid = 0;
        repeat (4) @(negedge clk);
        asf = 4'($urandom_range(0, 14));
      end
      in_valid = 1;
      x   = DDC_W'($urandom);
      kg  = KG_W'($urandom);
      w1  = (n % 5 == 0) ? GF_W'($urandom) : GF_W'($signed($urandom) >>> 8);
      w2  = (n % 7 == 0) ? GF_W'($urandom) : GF_W'($signed($urandom) >>> 8);
      tag_in = 4'(n);
      full = (((longint'(kg) * longint'(w1)) <<< asf) >>> 16) + (longint'(x) <<< 14) - (longint'(w2) <<< asf);
      st   = full >>> asf;
      e_ovf.push_back(st > hi || st < lo);
      e_w1.push_back(st > hi ? hi : (st < lo ? lo : st));
      e_w2.push_back(longint'(w1));
      e_tag.push_back(n % 16);
      e_t.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    check(e_w1.size() == 0, "all results seen");
    check(novf > 0, "saturation exercised");
    // 2) closed-loop recursion, bin 5 of 64, tone at bin 5
    mode_random = 0;
    asf = 4'd8;                                    // ceil(log2(4*64/pi)) = 7, one extra
    kgr = 2.0 * $cos(2.0 * PI * 5.0 / 64.0);
    kg  = KG_W'($rtoi($floor(kgr * 65536.0 + 0.5)));
    kgr = real'(kg) / 65536.0;
    scale = 2.0 ** (14 - 8);
    wf1 = 0; wf2 = 0;
    w1 = 0; w2 = 0;
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      in_valid = 1;
      x = DDC_W'($rtoi($floor(100000.0 * $cos(2.0 * PI * 5.0 * n / 64.0 + 0.3) + 0.5)));
      wf0 = real'(x) + kgr * wf1 - wf2; wf2 = wf1; wf1 = wf0;
      @(negedge clk) in_valid = 0;
      @(posedge out_valid);
      @(negedge clk);
      w1 = w1_out; w2 = w2_out;
    end
    check((real'(w1) / scale - wf1) ** 2 < (1e-4 * 100000.0 * 64.0) ** 2 + 4.0,
          $sformatf("recursion w1 %f vs %f", real'(w1) / scale, wf1));
    check((real'(w2) / scale - wf2) ** 2 < (1e-4 * 100000.0 * 64.0) ** 2 + 4.0,
          $sformatf("recursion w2 %f vs %f", real'(w2) / scale, wf2));
    check(wf1 * wf1 + wf2 * wf2 > 1e12, "tone grew the state");
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
