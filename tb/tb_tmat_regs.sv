// tb_tmat_regs: checks the identity after reset, single-entry writes at random
// addresses, and that writes to addresses 12..15 change nothing.
module tb_tmat_regs;
  import fpps_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic we = 0;
  logic [3:0] addr = '0;
  mat_t wdata = '0;
  tmat_t tmat;
  mat_t model [12];
  int checks = 0, failures = 0;

  tmat_regs dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare(string what);
    for (int k = 0; k < 12; k++)
      check(tmat[k] == model[k], $sformatf("%s entry %0d: %h vs %h", what, k, tmat[k], model[k]));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 12; k++) model[k] = (k == 0 || k == 5 || k == 10) ? 32'h4000_0000 : 32'h0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("identity after reset");
    for (int n = 0; n < 60; n++) begin
      int a;
      a = $urandom % 16;
      we = 1; addr = 4'(a); wdata = $urandom;
      if (a < 12) model[a] = wdata;
      @(negedge clk);
      we = 0;
      compare($sformatf("after write %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
