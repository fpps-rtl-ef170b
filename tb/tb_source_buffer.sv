// tb_source_buffer: writes a pattern to every address of a small source_buffer,
// reads it back in shuffled order and checks the one-cycle read latency,
// that rdata holds when re is low, and read-before-write on a shared address.
module tb_source_buffer;
  import fpps_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0;
  logic we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  point_t wdata = '0, rdata;
  int checks = 0, failures = 0;

  source_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic point_t pat(int a, int k);
    return '{x: coord_t'(a * 7919 + k), y: coord_t'(-a * 31 - k), z: coord_t'(a ^ 32'h5a5a_0000 ^ k)};
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
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we <= 1; waddr <= 6'(a); wdata <= pat(a, 1);
      @(posedge clk);
    end
    we <= 0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (order[i]) begin
      re <= 1; raddr <= 6'(order[i]);
      @(posedge clk);
      re <= 0;
      #1 check(rdata == pat(order[i], 1), $sformatf("read %0d", order[i]));
      @(posedge clk);
      #1 check(rdata == pat(order[i], 1), "rdata held while re low");
    end
    // same-address write and read: old data returned, new data next time
    re <= 1; raddr <= 6'd9; we <= 1; waddr <= 6'd9; wdata <= pat(9, 2);
    @(posedge clk);
    we <= 0;
    #1 check(rdata == pat(9, 1), "read-before-write");
    @(posedge clk);
    #1 check(rdata == pat(9, 2), "new data after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
