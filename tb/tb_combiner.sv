// Testbench for combiner: bursts of 4 random complex samples, back to back
// and with gaps; each burst must come out as I0 Q0 I1 Q1 I2 Q2 I3 Q3 on 8
// consecutive clocks with slot numbers 0..7 and the window marks attached.
module tb_combiner;
  import gfb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                    in_valid = 0, in_first = 0, in_last = 0;
  ddc_iq_t                 in [DDC_PER_CORE];
  logic                    out_valid, out_first, out_last;
  logic [2:0]              out_slot;
  logic signed [DDC_W-1:0] out_x;

  combiner dut (.clk, .rst, .in_valid, .in_first, .in_last, .in, .out_valid, .out_slot,
                .out_first, .out_last, .out_x);

  longint ex [$];
  int     es [$];
  bit     ef [$], el [$];
  int     nburst = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      check(ex.size() > 0, "unexpected output");
      if (ex.size() > 0) begin
        longint x; int s; bit f, l;
        x = ex.pop_front(); s = es.pop_front(); f = ef.pop_front(); l = el.pop_front();
        check(longint'(out_x) == x && int'(out_slot) == s && out_first == f && out_last == l,
              $sformatf("slot %0d x %0d, exp slot %0d x %0d", out_slot, out_x, s, x));
      end
    end else begin
      // between bursts nothing may be pending for more than a clock
      check(ex.size() == 0 || ex.size() == TDM, "gap inside a burst");
    end
  end

  task automatic burst(input int gap);
    @(negedge clk);
    in_valid = 1; in_first = ($urandom_range(0, 3) == 0); in_last = ($urandom_range(0, 3) == 0);
    for (int d = 0; d < DDC_PER_CORE; d++) begin
      in[d].i = DDC_W'($urandom); in[d].q = DDC_W'($urandom);
      ex.push_back(longint'(in[d].i)); es.push_back(2 * d);     ef.push_back(in_first); el.push_back(in_last);
      ex.push_back(longint'(in[d].q)); es.push_back(2 * d + 1); ef.push_back(in_first); el.push_back(in_last);
    end
    @(negedge clk) in_valid = 0;
    repeat (TDM - 2 + gap) @(negedge clk);
    nburst++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (20) burst(0);
    repeat (10) burst($urandom_range(1, 5));
    repeat (12) @(posedge clk);
    check(ex.size() == 0, "all slots seen");
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
