// Testbench for kg_bank: shifting 4 words in must not change the selected
// coefficients until an update request meets a window boundary; then sel
// must return the words in reverse order of writing (last written = bin 0).
module tb_kg_bank;
  import gfb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                   kg_shift = 0, kg_update = 0, boundary = 0, pending;
  logic signed [KG_W-1:0] kg_data = 0, kg_out;
  logic [1:0]             sel = 0;

  kg_bank dut (.clk, .rst, .kg_shift, .kg_data, .kg_update, .boundary, .sel, .kg_out, .pending);

  longint cur [4];
  longint nxt [4];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic check_all(input string what);
    for (int s = 0; s < 4; s++) begin
      @(negedge clk) sel = 2'(s);
      #1 check(longint'(kg_out) == cur[s], $sformatf("%s: bin %0d got %0d exp %0d", what, s, kg_out, cur[s]));
    end
  endtask

  initial begin
    for (int s = 0; s < 4; s++) cur[s] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    check_all("after reset");
    for (int round = 0; round < 6; round++) begin
      for (int s = 3; s >= 0; s--) begin
        @(negedge clk);
        kg_shift = 1; kg_data = KG_W'($urandom); nxt[s] = longint'(kg_data);
      end
      @(negedge clk) kg_shift = 0;
      check_all("shifted, not updated");
      if (round % 2 == 0) begin
        // request while no boundary: must wait
        @(negedge clk) kg_update = 1;
        @(negedge clk) kg_update = 0;
        #1 check(pending == 1'b1, "pending set");
        check_all("pending");
        @(negedge clk) boundary = 1;
        @(negedge clk) boundary = 0;
      end else begin
        // request on a boundary: immediate
        @(negedge clk) kg_update = 1; boundary = 1;
        @(negedge clk) kg_update = 0; boundary = 0;
      end
      #1 check(pending == 1'b0, "pending cleared");
      cur = nxt;
      check_all("updated");
    end
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
