// tb_src_point_regs: streams clouds of several sizes (multiples of COLS and
// not) into a 4-column register buffer with random gaps, takes each batch when
// full after a random delay, and checks full, the active points and the
// column mask of every batch, including the partial last one.
module tb_src_point_regs;
  import fpps_pkg::*;
  localparam int COLS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid = 0, wr_last = 0, full, take = 0;
  point_t wr_point = '0;
  point_t [COLS-1:0] act_points;
  logic   [COLS-1:0] act_mask;
  int checks = 0, failures = 0, partial = 0;

  src_point_regs #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic point_t pat(int cloud, int i);
    return '{x: coord_t'(cloud * 1000 + i), y: coord_t'(-i), z: coord_t'($urandom)};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes[5] = '{8, 5, 1, 11, 4};
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (sizes[s]) begin
      int n, i;
      point_t pts [$];
      n = sizes[s];
      i = 0;
      while (i < n) begin
        int got;
        got = 0;
        pts.delete();
        check(!full, "empty after take");
        while (!full) begin
          if (($urandom % 3) != 0) begin
            point_t pt;
            pt = pat(s, i);
            pts.push_back(pt);
            wr_valid = 1; wr_point = pt; wr_last = (i == n - 1);
            i++;
          end
          @(negedge clk);
          wr_valid = 0; wr_last = 0;
        end
        check(pts.size() == ((n - (i - pts.size()) >= COLS) ? COLS : n - (i - pts.size())), "batch size at full");
        repeat ($urandom % 3) @(negedge clk);
        check(full, "full holds until take");
        take = 1;
        @(negedge clk);
        take = 0;
        if (pts.size() < COLS) partial++;
        for (int c = 0; c < COLS; c++) begin
          check(act_mask[c] == (c < pts.size()), $sformatf("mask col %0d", c));
          if (c < pts.size()) check(act_points[c] == pts[c], $sformatf("point col %0d", c));
        end
      end
    end
    check(partial >= 3, "partial batches seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
