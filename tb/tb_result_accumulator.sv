// tb_result_accumulator: streams random correspondences (some without a
// candidate, some beyond the distance limit) with gaps, then checks count,
// rejected count and every sum against a model written with 128-bit
// arithmetic. A clear in the middle of a second stream restarts the sums.
module tb_result_accumulator;
  import fpps_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 0, in_valid = 0, in_ready, busy;
  dist_t max_dist_sq;
  corr_t in_data;
  acc_result_t result;
  int checks = 0, failures = 0;
  logic signed [127:0] m_p [3], m_q [3], m_pq [9], m_d;
  int m_cnt, m_rej;

  result_accumulator dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic signed [127:0] cc(point_t pt, int i);
    return (i == 0) ? 128'(pt.x) : (i == 1) ? 128'(pt.y) : 128'(pt.z);
  endfunction

  task automatic model_clear();
    for (int i = 0; i < 3; i++) begin m_p[i] = 0; m_q[i] = 0; end
    for (int k = 0; k < 9; k++) m_pq[k] = 0;
    m_d = 0; m_cnt = 0; m_rej = 0;
  endtask

  task automatic compare(string what);
    check(int'(result.count) == m_cnt, $sformatf("%s count %0d vs %0d", what, result.count, m_cnt));
    check(int'(result.rejected) == m_rej, $sformatf("%s rejected", what));
    for (int i = 0; i < 3; i++) begin
      check(128'(result.sum_p[i]) == m_p[i], $sformatf("%s sum_p[%0d]", what, i));
      check(128'(result.sum_q[i]) == m_q[i], $sformatf("%s sum_q[%0d]", what, i));
    end
    for (int k = 0; k < 9; k++) check(128'(result.sum_pq[k]) == m_pq[k], $sformatf("%s sum_pq[%0d]", what, k));
    check(128'(result.sum_d) == m_d, $sformatf("%s sum_d", what));
  endtask

  task automatic stream(int n);
    for (int t = 0; t < n; t++) begin
      in_valid = ($urandom % 4) != 0;
      in_data.p  = '{x: coord_t'($urandom), y: coord_t'($urandom), z: coord_t'($urandom)};
      in_data.nn.q = '{x: coord_t'($urandom), y: coord_t'($urandom), z: coord_t'($urandom)};
      in_data.nn.idx = idx_t'($urandom);
      in_data.nn.found = ($urandom % 10) != 0;
      in_data.nn.d2 = {4'($urandom), 32'($urandom), 32'($urandom)} >> ($urandom % 40);
      check(in_ready, "always ready");
      if (in_valid) begin
        if (in_data.nn.found && in_data.nn.d2 <= max_dist_sq) begin
          m_cnt++;
          for (int i = 0; i < 3; i++) begin
            m_p[i] += cc(in_data.p, i);
            m_q[i] += cc(in_data.nn.q, i);
            for (int j = 0; j < 3; j++) m_pq[3*i+j] += cc(in_data.p, i) * cc(in_data.nn.q, j);
          end
          m_d += 128'(in_data.nn.d2);
        end else m_rej++;
      end
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    max_dist_sq = dist_t'(64'h0000_0100_0000_0000);
    in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model_clear();
    stream(500);
    check(busy || !in_valid, "busy flag");
    @(negedge clk);
    @(negedge clk);
    check(!busy, "idle after stream");
    compare("first stream");
    check(m_rej > 50 && m_cnt > 50, "both accepted and rejected pairs");
    stream(50);
    clear = 1;
    @(negedge clk);
    clear = 0;
    model_clear();
    max_dist_sq = '1;
    stream(300);
    repeat (2) @(negedge clk);
    compare("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
