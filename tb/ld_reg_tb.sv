// ld_reg_tb -- checks load, hold and synchronous reset of the register at two widths.
module ld_reg_tb;
  logic clk = 0, rst;
  logic ld16, ld48;
  logic [15:0] d16, q16;
  logic [47:0] d48, q48;
  int checks = 0, failures = 0;

  ld_reg #(.WIDTH(16))                            dut16 (.clk, .rst, .ld(ld16), .d(d16), .q(q16));
  ld_reg #(.WIDTH(48), .RESET_VALUE(48'hA5A5_0000_FFFF)) dut48 (.clk, .rst, .ld(ld48), .d(d48), .q(q48));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] m16;
    logic [47:0] m48;
    rst = 1; ld16 = 0; ld48 = 0; d16 = '1; d48 = '1;
    @(posedge clk); #1;
    check(q16 == 16'h0 && q48 == 48'hA5A5_0000_FFFF, "reset value");
    rst = 0;
    m16 = q16; m48 = q48;
    for (int t = 0; t < 200; t++) begin
      ld16 = $urandom_range(1); ld48 = $urandom_range(1);
      d16 = 16'($urandom); d48 = {16'($urandom), 32'($urandom)};
      if (ld16) m16 = d16;
      if (ld48) m48 = d48;
      @(posedge clk); #1;
      check(q16 == m16, $sformatf("q16 %h exp %h", q16, m16));
      check(q48 == m48, $sformatf("q48 %h exp %h", q48, m48));
    end
    rst = 1; ld16 = 1; ld48 = 1;
    @(posedge clk); #1;
    check(q16 == 16'h0 && q48 == 48'hA5A5_0000_FFFF, "reset wins over load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
