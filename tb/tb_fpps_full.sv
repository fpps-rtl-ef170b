// tb_fpps_full: one complete ICP step of the kernel at its default size,
// 16 x 16 PEs, 131072 target points and 4096 source points.
// The target cloud is a 64 x 64 x 32 grid with 1 m spacing. Each source point
// is a grid point plus noise of less than 0.3 m per axis, pre-moved by the
// inverse of T = (rotation by 90 degrees about z, translation (2.5, -1.25,
// 0.75) m), which is exact in the fixed-point formats. After OP_TRANSFORM the
// source points are back beside their grid points, so the nearest neighbour
// of each is known without a search. With a 0.45 m distance limit some pairs
// are rejected. The result package is checked against sums formed from the
// known pairs, and the search time against the batch model
// 256 batches * (8192 beats + 5) cycles.
module tb_fpps_full;
  import fpps_pkg::*;
  localparam int NT = 131072, NS = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tgt_we = 0, src_we = 0, cfg_we = 0, cmd_valid = 0;
  idx_t tgt_waddr = '0;
  point_t tgt_wdata = '0, src_wdata = '0;
  logic [11:0] src_waddr = '0;
  logic [3:0] cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  op_e cmd_op = OP_NONE;
  logic cmd_ready, done;
  acc_result_t result;
  logic [CNT_W-1:0] stat_read_stall, stat_result_stall;
  int checks = 0, failures = 0;

  fpps_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic point_t grid(int j);
    return '{x: coord_t'(j % 64) <<< 16, y: coord_t'((j / 64) % 64) <<< 16, z: coord_t'(j / 4096) <<< 16};
  endfunction

  function automatic logic signed [127:0] cc(point_t pt, int i);
    return (i == 0) ? 128'(pt.x) : (i == 1) ? 128'(pt.y) : 128'(pt.z);
  endfunction

  task automatic cfg(int a, logic [31:0] d);
    cfg_we = 1; cfg_addr = 4'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (2_400_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam coord_t TX = 32'sd163840, TY = -32'sd81920, TZ = 32'sd49152;  // 2.5, -1.25, 0.75 m
    localparam logic [31:0] MAXD = 32'd29491;                              // 0.45 m
    point_t after [NS];
    int knn [NS];
    int cyc, m_cnt, m_rej;
    logic signed [127:0] m_p [3], m_q [3], m_pq [9], m_d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NT; j++) begin
      tgt_we = 1; tgt_waddr = idx_t'(j); tgt_wdata = grid(j);
      @(negedge clk);
    end
    tgt_we = 0;
    for (int i = 0; i < NS; i++) begin
      point_t v;
      knn[i] = (i * 7919 + 13) % NT;
      v = grid(knn[i]);
      v.x += coord_t'(int'($urandom % 39000) - 19500);
      v.y += coord_t'(int'($urandom % 39000) - 19500);
      v.z += coord_t'(int'($urandom % 39000) - 19500);
      after[i] = v;
      // inverse of T: R^-1 (v - t), with R^-1 (a, b, c) = (b, -a, c)
      src_we = 1; src_waddr = 12'(i);
      src_wdata = '{x: v.y - TY, y: -(v.x - TX), z: v.z - TZ};
      @(negedge clk);
    end
    src_we = 0;
    cfg(CFG_NSRC, NS); cfg(CFG_NTGT, NT); cfg(CFG_MAXDIST, MAXD);
    cfg(0, 32'h0);  cfg(1, 32'hc000_0000); cfg(2, 32'h0);  cfg(3, TX);
    cfg(4, 32'h4000_0000); cfg(5, 32'h0);  cfg(6, 32'h0);  cfg(7, TY);
    cfg(8, 32'h0);  cfg(9, 32'h0);  cfg(10, 32'h4000_0000); cfg(11, TZ);
    // transform
    cmd_valid = 1; cmd_op = OP_TRANSFORM;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == NS + 4, $sformatf("transform took %0d cycles", cyc));
    for (int i = 0; i < NS; i += 97)
      check(dut.u_src_buf.mem[i] == after[i], $sformatf("transformed point %0d", i));
    // search
    cmd_valid = 1; cmd_op = OP_SEARCH;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("search of %0d x %0d points: %0d cycles", NS, NT, cyc);
    check(cyc >= 256 * (8192 + 5) && cyc <= 256 * (8192 + 5) + 100,
          $sformatf("search time %0d vs model %0d", cyc, 256 * (8192 + 5)));
    // expected result package from the known pairs
    for (int a = 0; a < 3; a++) begin m_p[a] = 0; m_q[a] = 0; end
    for (int k = 0; k < 9; k++) m_pq[k] = 0;
    m_d = 0; m_cnt = 0; m_rej = 0;
    for (int i = 0; i < NS; i++) begin
      point_t g;
      logic signed [127:0] d;
      g = grid(knn[i]);
      d = (cc(after[i], 0) - cc(g, 0)) ** 2 + (cc(after[i], 1) - cc(g, 1)) ** 2
        + (cc(after[i], 2) - cc(g, 2)) ** 2;
      if (d <= 128'(MAXD) * 128'(MAXD)) begin
        m_cnt++;
        for (int a = 0; a < 3; a++) begin
          m_p[a] += cc(after[i], a);
          m_q[a] += cc(g, a);
          for (int b = 0; b < 3; b++) m_pq[3*a+b] += cc(after[i], a) * cc(g, b);
        end
        m_d += d;
      end else m_rej++;
    end
    check(int'(result.count) == m_cnt, $sformatf("count %0d vs %0d", result.count, m_cnt));
    check(int'(result.rejected) == m_rej, $sformatf("rejected %0d vs %0d", result.rejected, m_rej));
    for (int a = 0; a < 3; a++) begin
      check(128'(result.sum_p[a]) == m_p[a], $sformatf("sum_p[%0d]", a));
      check(128'(result.sum_q[a]) == m_q[a], $sformatf("sum_q[%0d]", a));
    end
    for (int k = 0; k < 9; k++) check(128'(result.sum_pq[k]) == m_pq[k], $sformatf("sum_pq[%0d]", k));
    check(128'(result.sum_d) == m_d, "sum_d");
    check(m_rej > 0 && m_cnt > 0, "both accepted and rejected pairs");
    $display("accepted %0d, rejected %0d, read stall %0d, result stall %0d",
             result.count, result.rejected, stat_read_stall, stat_result_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
