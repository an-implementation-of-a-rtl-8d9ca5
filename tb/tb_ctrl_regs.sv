// Testbench for ctrl_regs: reset values, every configuration register, and
// the address/data/strobe outputs of each table write (CFIR, window, kg,
// a/b/c/d RAMs of both X[k] units); writes outside a table must not strobe.
module tb_ctrl_regs;
  import gfb_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        reg_we = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0;
  logic        enable, cfir_we, win_we, kg_update;
  logic [10:0] win_size;
  logic [3:0]  asf;
  logic [17:0] acf;
  logic [6:0]  out_shift;
  logic [31:0] ftw [8];
  logic [5:0]  cfir_addr;
  logic signed [17:0] cfir_data, win_data, kg_data;
  logic [9:0]  win_addr;
  logic [15:0] kg_shift;
  logic [3:0]  coef_we [2];
  logic [4:0]  coef_addr;
  logic [17:0] coef_data;

  ctrl_regs dut (.clk, .rst, .reg_we, .reg_addr, .reg_wdata, .enable, .win_size, .asf, .acf, .out_shift,
                 .ftw, .cfir_we, .cfir_addr, .cfir_data, .win_we, .win_addr, .win_data, .kg_shift, .kg_data,
                 .kg_update, .coef_we, .coef_addr, .coef_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk) reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk) reg_we = 0;
  endtask

  function automatic bit no_strobe();
    return !cfir_we && !win_we && !kg_update && kg_shift == 0 && coef_we[0] == 0 && coef_we[1] == 0;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check(!enable && win_size == 256 && asf == 9 && acf == 18'h20000 && out_shift == 38, "reset values");
    wr(REG_CTRL, 1);        check(enable, "enable");
    wr(REG_WIN_SIZE, 1024); check(win_size == 1024, "win size");
    wr(REG_ASF, 11);        check(asf == 11, "asf");
    wr(REG_ACF, 12345);     check(acf == 12345, "acf");
    wr(REG_OUT_SHIFT, 45);  check(out_shift == 45, "out shift");
    for (int d = 0; d < 8; d++) wr(REG_NCO_BASE + 16'(d), 32'h1000_0000 * d + 7);
    for (int d = 0; d < 8; d++) check(ftw[d] == 32'h1000_0000 * d + 7, $sformatf("ftw %0d", d));
    // table writes: strobe visible in the clock after the write
    @(negedge clk) reg_we = 1; reg_addr = REG_CFIR_BASE + 16'd63; reg_wdata = 32'h3_0001;
    @(negedge clk) reg_we = 0;
    check(cfir_we && cfir_addr == 63 && cfir_data == 18'sh3_0001, "cfir write");
    @(negedge clk) check(no_strobe(), "strobe one clock long");
    @(negedge clk) reg_we = 1; reg_addr = REG_WIN_BASE + 16'd777; reg_wdata = 32'h1_2345;
    @(negedge clk) reg_we = 0;
    check(win_we && win_addr == 777 && win_data == 18'sh1_2345, "window write");
    @(negedge clk) reg_we = 1; reg_addr = REG_KG_BASE + 16'd13; reg_wdata = 32'h2_0000;
    @(negedge clk) reg_we = 0;
    check(kg_shift == 16'h2000 && kg_data == 18'sh2_0000, "kg shift");
    @(negedge clk) reg_we = 1; reg_addr = REG_KG_UPDATE; reg_wdata = 0;
    @(negedge clk) reg_we = 0;
    check(kg_update, "kg update");
    for (int u = 0; u < 2; u++)
      for (int sel = 0; sel < 4; sel++) begin
        @(negedge clk) reg_we = 1; reg_addr = REG_COEF_BASE + 16'((u << 7) | (sel << 5) | 21); reg_wdata = 32'(1000 + sel);
        @(negedge clk) reg_we = 0;
        check(coef_we[u] == (4'b0001 << sel) && coef_we[1-u] == 0 && coef_addr == 21 && coef_data == 18'(1000 + sel),
              $sformatf("coef unit %0d sel %0d", u, sel));
      end
    // outside the tables
    @(negedge clk) reg_we = 1; reg_addr = REG_CFIR_BASE + 16'd64;
    @(negedge clk) reg_we = 0; check(no_strobe(), "beyond cfir");
    @(negedge clk) reg_we = 1; reg_addr = REG_KG_BASE + 16'd16;
    @(negedge clk) reg_we = 0; check(no_strobe(), "beyond kg");
    @(negedge clk) reg_we = 1; reg_addr = REG_COEF_BASE + 16'd256;
    @(negedge clk) reg_we = 0; check(no_strobe(), "beyond coef");
    check(win_size == 1024 && asf == 11, "registers kept");
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
