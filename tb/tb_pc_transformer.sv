// tb_pc_transformer: pc_transformer with a source_buffer. Loads random points,
// programs a rotation about an arbitrary axis plus a translation, runs the
// transform over part of the buffer and checks every point against an exact
// integer model (round to nearest of R*p, then + t) and against real-number
// math within one LSB; points beyond n_points must be untouched. A second run
// with a huge translation checks saturation. done must come n_points + 2
// cycles after start.
module tb_pc_transformer;
  import fpps_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0, busy, done;
  logic [6:0] n_points;
  tmat_t tmat;
  logic rd_en, wr_en, hwe = 0;
  logic [5:0] rd_addr, wr_addr, haddr = '0;
  point_t rd_data, wr_data, hdata = '0;
  int checks = 0, failures = 0;
  point_t orig [DEPTH];
  int sat_seen = 0;

  pc_transformer #(.DEPTH(DEPTH)) dut (.*);
  source_buffer #(.DEPTH(DEPTH)) buf_i (
    .clk(clk), .we(busy ? wr_en : hwe), .waddr(busy ? wr_addr : haddr), .wdata(busy ? wr_data : hdata),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data));

  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint model_row(tmat_t m, int i, point_t p);
    longint s;
    s = longint'(m[4*i]) * longint'(p.x) + longint'(m[4*i+1]) * longint'(p.y)
      + longint'(m[4*i+2]) * longint'(p.z) + (64'sd1 <<< 29);
    return sat32((s >>> 30) + longint'(m[4*i+3]));
  endfunction

  function automatic coord_t comp(point_t p, int i);
    return (i == 0) ? p.x : (i == 1) ? p.y : p.z;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(int n, logic sat_case);
    int cycles;
    real rr [9];
    n_points = 7'(n);
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 0;  // cycles after the edge that accepted start
    #1;
    while (!done) begin @(posedge clk); #1; cycles++; end
    check(cycles == n + 2, $sformatf("latency %0d, expected %0d", cycles, n + 2));
    @(posedge clk);
    for (int k = 0; k < 9; k++) rr[k] = real'(tmat[4*(k/3) + k%3]) / 1073741824.0;
    for (int a = 0; a < DEPTH; a++) begin
      point_t got;
      got = buf_i.mem[a];
      if (a >= n) check(got == orig[a], $sformatf("untouched %0d", a));
      else for (int i = 0; i < 3; i++) begin
        longint exp_v;
        real rv;
        exp_v = model_row(tmat, i, orig[a]);
        check(longint'(comp(got, i)) == exp_v, $sformatf("point %0d coord %0d: %0d vs %0d", a, i, comp(got, i), exp_v));
        if (!sat_case) begin
          rv = rr[3*i] * real'(orig[a].x) + rr[3*i+1] * real'(orig[a].y) + rr[3*i+2] * real'(orig[a].z)
             + real'(tmat[4*i+3]);
          check((real'(comp(got, i)) - rv) < 1.0 && (rv - real'(comp(got, i))) < 1.0, "real-number cross-check");
        end else if (i == 0 && comp(got, i) == 32'sh7fff_ffff) sat_seen++;
      end
      orig[a] = got;
    end
  endtask

  initial begin
    real th, ax, ay, az, c, s, nrm;
    real R [9];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < DEPTH; a++) begin
      orig[a] = '{x: coord_t'($signed($urandom) >>> 8), y: coord_t'($signed($urandom) >>> 8),
                  z: coord_t'($signed($urandom) >>> 8)};
      hwe <= 1; haddr <= 6'(a); hdata <= orig[a];
      @(posedge clk);
    end
    hwe <= 0;
    // rotation by 0.3 rad about (1, 2, 3)/|.|, Rodrigues' formula
    th = 0.3; ax = 1.0; ay = 2.0; az = 3.0; nrm = $sqrt(ax*ax + ay*ay + az*az);
    ax /= nrm; ay /= nrm; az /= nrm; c = $cos(th); s = $sin(th);
    R = '{c + ax*ax*(1-c), ax*ay*(1-c) - az*s, ax*az*(1-c) + ay*s,
          ay*ax*(1-c) + az*s, c + ay*ay*(1-c), ay*az*(1-c) - ax*s,
          az*ax*(1-c) - ay*s, az*ay*(1-c) + ax*s, c + az*az*(1-c)};
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) tmat[4*i+j] = mat_t'($rtoi(R[3*i+j] * 1073741824.0));
    end
    tmat[3] = 32'sd1_250_000; tmat[7] = -32'sd65536; tmat[11] = 32'sd3;
    run_and_check(50, 1'b0);
    // saturation: x translation near the top of the range
    tmat[3] = 32'sh7fff_0000;
    tmat[0] = 32'sh4000_0000; tmat[1] = 0; tmat[2] = 0;
    for (int a = 0; a < 50; a++) if (orig[a].x < 0) orig[a].x = -orig[a].x;
    for (int a = 0; a < 50; a++) begin
      hwe <= 1; haddr <= 6'(a); hdata <= orig[a];
      @(posedge clk);
    end
    hwe <= 0;
    run_and_check(50, 1'b1);
    check(sat_seen > 10, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
