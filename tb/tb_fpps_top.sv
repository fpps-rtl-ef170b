// tb_fpps_top: end-to-end test of the kernel at reduced size (4 x 4 PEs,
// 256 target and 64 source points). It plays the host's part of several ICP
// iterations: load both clouds, program T, transform the source cloud, search,
// and compare the result package with a model that transforms the cloud,
// searches by brute force and forms the sums with the distance limit. It then
// reprograms T, transforms again and searches again. The configurations are
// chosen so that each mechanism of the design occurs; their counts are printed
// and a mechanism that never occurs counts as a failure.
module tb_fpps_top;
  import fpps_pkg::*;
  localparam int ROWS = 4, COLS = 4, TGT_DEPTH = 256, SRC_DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tgt_we = 0, src_we = 0, cfg_we = 0, cmd_valid = 0;
  idx_t tgt_waddr = '0;
  point_t tgt_wdata = '0, src_wdata = '0;
  logic [5:0] src_waddr = '0;
  logic [3:0] cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  op_e cmd_op = OP_NONE;
  logic cmd_ready, done;
  acc_result_t result;
  logic [CNT_W-1:0] stat_read_stall, stat_result_stall;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_transform = 0, n_search = 0, n_rejected = 0, n_partial_batch = 0, n_partial_beat = 0,
      n_result_stall = 0, n_read_stall = 0, n_saturate = 0;

  point_t src [SRC_DEPTH];
  point_t tgt [TGT_DEPTH];
  mat_t   T [12];

  fpps_top #(.ROWS(ROWS), .COLS(COLS), .TGT_DEPTH(TGT_DEPTH), .SRC_DEPTH(SRC_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic signed [127:0] cc(point_t pt, int i);
    return (i == 0) ? 128'(pt.x) : (i == 1) ? 128'(pt.y) : 128'(pt.z);
  endfunction

  task automatic cfg(int a, logic [31:0] d);
    cfg_we = 1; cfg_addr = 4'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic command(op_e op, output int cycles);
    check(cmd_ready, "ready for a command");
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // model of the transformer: round(R p) + t, saturated
  function automatic point_t xform(point_t p);
    longint v [3];
    for (int i = 0; i < 3; i++) begin
      longint s;
      s = longint'(T[4*i]) * longint'(p.x) + longint'(T[4*i+1]) * longint'(p.y)
        + longint'(T[4*i+2]) * longint'(p.z) + (64'sd1 <<< 29);
      v[i] = (s >>> 30) + longint'(T[4*i+3]);
      if (v[i] > 64'sd2147483647) begin v[i] = 64'sd2147483647; n_saturate++; end
      if (v[i] < -64'sd2147483648) begin v[i] = -64'sd2147483648; n_saturate++; end
    end
    return '{x: coord_t'(v[0]), y: coord_t'(v[1]), z: coord_t'(v[2])};
  endfunction

  task automatic iteration(int ns, int nt, logic [31:0] maxd, string name);
    int cyc;
    logic signed [127:0] m_p [3], m_q [3], m_pq [9], m_d;
    int m_cnt, m_rej;
    longint md2;
    cfg(CFG_NSRC, ns); cfg(CFG_NTGT, nt); cfg(CFG_MAXDIST, maxd);
    for (int k = 0; k < 12; k++) cfg(CFG_TMAT0 + k, T[k]);
    command(OP_TRANSFORM, cyc);
    n_transform++;
    // done pulses n_src + 3 cycles after the accepting edge; cyc also counts the command cycle
    check(cyc == ns + 4, $sformatf("%s: transform took %0d cycles", name, cyc));
    for (int i = 0; i < ns; i++) src[i] = xform(src[i]);
    command(OP_SEARCH, cyc);
    n_search++;
    // model
    for (int i = 0; i < 3; i++) begin m_p[i] = 0; m_q[i] = 0; end
    for (int k = 0; k < 9; k++) m_pq[k] = 0;
    m_d = 0; m_cnt = 0; m_rej = 0;
    md2 = longint'(maxd) * longint'(maxd);
    for (int i = 0; i < ns; i++) begin
      int bj;
      logic [127:0] bd, d;
      bj = -1; bd = '1;
      for (int j = 0; j < nt; j++) begin
        d = 128'((cc(src[i], 0) - cc(tgt[j], 0)) ** 2 + (cc(src[i], 1) - cc(tgt[j], 1)) ** 2
                 + (cc(src[i], 2) - cc(tgt[j], 2)) ** 2);
        if (bj < 0 || d < bd) begin bj = j; bd = d; end
      end
      if (bj >= 0 && bd <= 128'(md2)) begin
        m_cnt++;
        for (int a = 0; a < 3; a++) begin
          m_p[a] += cc(src[i], a);
          m_q[a] += cc(tgt[bj], a);
          for (int b = 0; b < 3; b++) m_pq[3*a+b] += cc(src[i], a) * cc(tgt[bj], b);
        end
        m_d += bd;
      end else m_rej++;
    end
    check(int'(result.count) == m_cnt, $sformatf("%s: count %0d vs %0d", name, result.count, m_cnt));
    check(int'(result.rejected) == m_rej, $sformatf("%s: rejected %0d vs %0d", name, result.rejected, m_rej));
    for (int a = 0; a < 3; a++) begin
      check(128'(result.sum_p[a]) == m_p[a], $sformatf("%s: sum_p[%0d]", name, a));
      check(128'(result.sum_q[a]) == m_q[a], $sformatf("%s: sum_q[%0d]", name, a));
    end
    for (int k = 0; k < 9; k++) check(128'(result.sum_pq[k]) == m_pq[k], $sformatf("%s: sum_pq[%0d]", name, k));
    check(128'(result.sum_d) == m_d, $sformatf("%s: sum_d", name));
    if (m_rej > 0) n_rejected++;
    if (ns % COLS != 0) n_partial_batch++;
    if (nt % ROWS != 0) n_partial_beat++;
    if (stat_result_stall > 0) n_result_stall++;
    if (stat_read_stall > 0) n_read_stall++;
    $display("%s: search %0d cycles, accepted %0d, rejected %0d, read stall %0d, result stall %0d",
             name, cyc, result.count, result.rejected, stat_read_stall, stat_result_stall);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real c, s;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // clouds in metres (Q16.16), the source a rotated, shifted, noisy copy of part of the target
    for (int j = 0; j < TGT_DEPTH; j++) begin
      tgt[j] = '{x: coord_t'(int'($urandom % 40) - 20) * 32'sd65536 + coord_t'($urandom % 65536),
                 y: coord_t'(int'($urandom % 40) - 20) * 32'sd65536 + coord_t'($urandom % 65536),
                 z: coord_t'(int'($urandom % 4)) * 32'sd65536 + coord_t'($urandom % 65536)};
      tgt_we = 1; tgt_waddr = idx_t'(j); tgt_wdata = tgt[j];
      @(negedge clk);
    end
    tgt_we = 0;
    for (int i = 0; i < SRC_DEPTH; i++) begin
      point_t t;
      t = tgt[(i * 37) % TGT_DEPTH];
      src[i] = '{x: t.x + coord_t'(int'($urandom % 20000) - 10000) + 32'sd40000,
                 y: t.y + coord_t'(int'($urandom % 20000) - 10000), z: t.z};
      if (i % 9 == 0) src[i].z = src[i].z + 32'sd300_000;   // outliers
      src_we = 1; src_waddr = 6'(i); src_wdata = src[i];
      @(negedge clk);
    end
    src_we = 0;
    // iteration 1: rotate by -0.01 rad about z, move back by about 0.6 m in x
    c = $cos(-0.01); s = $sin(-0.01);
    T = '{mat_t'($rtoi(c * 1073741824.0)), mat_t'($rtoi(-s * 1073741824.0)), 0, -32'sd40000,
          mat_t'($rtoi(s * 1073741824.0)), mat_t'($rtoi(c * 1073741824.0)), 0, 0,
          0, 0, 32'sh4000_0000, 0};
    iteration(SRC_DEPTH, TGT_DEPTH, 32'd65536, "iteration 1");
    // iteration 2: a small correction, smaller clouds with partial batch and beat
    T = '{32'sh4000_0000, 0, 0, 32'sd1000, 0, 32'sh4000_0000, 0, -32'sd500, 0, 0, 32'sh4000_0000, 0};
    iteration(23, 13, 32'd32768, "iteration 2");
    // iteration 3: identity except a translation that saturates, tiny target cloud
    T = '{32'sh4000_0000, 0, 0, 32'sh7ff0_0000, 0, 32'sh4000_0000, 0, 0, 0, 0, 32'sh4000_0000, 0};
    iteration(10, 3, 32'hffff_ffff, "iteration 3");
    $display("mechanisms: transform=%0d search=%0d outlier_rejection=%0d partial_batch=%0d partial_beat=%0d read_stall=%0d result_stall=%0d saturation=%0d",
             n_transform, n_search, n_rejected, n_partial_batch, n_partial_beat, n_read_stall, n_result_stall, n_saturate);
    check(n_transform > 0, "transform happened");
    check(n_search > 0, "search happened");
    check(n_rejected > 0, "outlier rejection happened");
    check(n_partial_batch > 0, "partial source batch happened");
    check(n_partial_beat > 0, "partial target beat happened");
    check(n_read_stall > 0, "read stall happened");
    check(n_result_stall > 0, "result stall happened");
    check(n_saturate > 0, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
