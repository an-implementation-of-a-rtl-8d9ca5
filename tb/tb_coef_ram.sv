// Testbench for coef_ram: random writes, then reads compared with a model;
// the read data must appear one clock after the address.
module tb_coef_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        we = 0;
  logic [4:0]  waddr = 0, raddr = 0;
  logic [17:0] wdata = 0, rdata;

  coef_ram #(.DEPTH(32), .W(18)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  logic [17:0] model [32];

  initial begin
    for (int k = 0; k < 32; k++) begin
      @(negedge clk) we = 1; waddr = 5'(k); wdata = 18'($urandom); model[k] = wdata;
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = ($urandom_range(0, 2) == 0); waddr = 5'($urandom); wdata = 18'($urandom);
      raddr = 5'($urandom);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      if (we) model[waddr] = wdata;
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
