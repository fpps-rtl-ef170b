// tb_target_buffer: loads a small banked target_buffer point by point in random
// order and checks that each beat returns points b*ROWS .. b*ROWS+ROWS-1 in
// bank order, one cycle after the read.
module tb_target_buffer;
  import fpps_pkg::*;
  localparam int ROWS = 4, DEPTH = 64;
  logic clk = 1'b0;
  logic we = 0, re = 0;
  idx_t waddr = '0;
  point_t wdata = '0;
  logic [3:0] raddr = '0;
  point_t [ROWS-1:0] rdata;
  int checks = 0, failures = 0;

  target_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic point_t pat(int i);
    return '{x: coord_t'(i * 65536 + 3), y: coord_t'(-i * 1234), z: coord_t'(i * i + 17)};
  endfunction

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[DEPTH];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    @(posedge clk);
    foreach (order[i]) begin
      we <= 1; waddr <= idx_t'(order[i]); wdata <= pat(order[i]);
      @(posedge clk);
    end
    we <= 0;
    for (int b = DEPTH / ROWS - 1; b >= 0; b--) begin
      re <= 1; raddr <= 4'(b);
      @(posedge clk);
      re <= 0;
      #1;
      for (int r = 0; r < ROWS; r++)
        check(rdata[r] == pat(b * ROWS + r), $sformatf("beat %0d row %0d", b, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
