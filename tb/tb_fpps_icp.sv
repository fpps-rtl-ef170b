// tb_fpps_icp: complete ICP registrations with the evaluation's ICP settings
// (at most 50 iterations, maximum correspondence distance 1.0 m, transformation
// epsilon 1e-5), at reduced size: 4 x 4 PEs, 1024 target and 64 source points.
// The testbench plays the host. It loads the clouds, applies an initial guess
// once, then iterates: OP_SEARCH, an SVD-equivalent solve (Horn's closed-form
// quaternion method, the largest eigenvector of a 4 x 4 symmetric matrix found
// by Jacobi rotations) on the result package, OP_TRANSFORM with the new
// increment, until the increment is below epsilon. The source cloud is an
// exact subset of the target cloud moved by a known rigid motion, so the
// accumulated transformation must recover that motion and the final mean
// squared distance must be near zero. Two registrations with different
// motions are run.
module tb_fpps_icp;
  import fpps_pkg::*;
  localparam int ROWS = 4, COLS = 4, NT = 1024, NS = 64;
  localparam real Q16 = 65536.0, Q30 = 1073741824.0;
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
  point_t tgt [NT];

  fpps_top #(.ROWS(ROWS), .COLS(COLS), .TGT_DEPTH(NT), .SRC_DEPTH(NS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(int a, logic [31:0] d);
    cfg_we = 1; cfg_addr = 4'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic command(op_e op);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  // accumulator value to real; the sums in these runs stay within 64 bits
  function automatic real acc2r(acc_t v);
    longint l;
    l = longint'(v);
    return real'(l);
  endfunction

  // 3x4 rigid transforms as real arrays: r[0..8] rotation row-major, r[9..11] translation
  typedef real xf_t [12];

  function automatic xf_t compose(xf_t a, xf_t b);  // a after b
    xf_t c;
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) c[3*i+j] = a[3*i]*b[j] + a[3*i+1]*b[3+j] + a[3*i+2]*b[6+j];
      c[9+i] = a[3*i]*b[9] + a[3*i+1]*b[10] + a[3*i+2]*b[11] + a[9+i];
    end
    return c;
  endfunction

  function automatic xf_t from_axis_angle(real ax, real ay, real az, real th, real tx, real ty, real tz);
    xf_t m;
    real n, c, s;
    n = $sqrt(ax*ax + ay*ay + az*az); ax /= n; ay /= n; az /= n;
    c = $cos(th); s = $sin(th);
    m = '{c + ax*ax*(1-c), ax*ay*(1-c) - az*s, ax*az*(1-c) + ay*s,
          ay*ax*(1-c) + az*s, c + ay*ay*(1-c), ay*az*(1-c) - ax*s,
          az*ax*(1-c) - ay*s, az*ay*(1-c) + ax*s, c + az*az*(1-c), tx, ty, tz};
    return m;
  endfunction

  function automatic xf_t inverse(xf_t m);
    xf_t v;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) v[3*i+j] = m[3*j+i];
    for (int i = 0; i < 3; i++) v[9+i] = -(v[3*i]*m[9] + v[3*i+1]*m[10] + v[3*i+2]*m[11]);
    return v;
  endfunction

  task automatic send_and_transform(xf_t m);
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) cfg(4*i+j, 32'($rtoi(m[3*i+j] * Q30 + (m[3*i+j] >= 0 ? 0.5 : -0.5))));
      cfg(4*i+3, 32'($rtoi(m[9+i] * Q16 + (m[9+i] >= 0 ? 0.5 : -0.5))));
    end
    command(OP_TRANSFORM);
  endtask

  // Horn's method: rotation from the centred cross-covariance S (S[3a+b] = sum pa*qb)
  function automatic xf_t horn_solve(real S [9], real pc [3], real qc [3]);
    real N [4][4], V [4][4];
    real w, x, y, z;
    int best;
    xf_t m;
    N[0][0] = S[0]+S[4]+S[8]; N[0][1] = S[5]-S[7]; N[0][2] = S[6]-S[2]; N[0][3] = S[1]-S[3];
    N[1][1] = S[0]-S[4]-S[8]; N[1][2] = S[1]+S[3]; N[1][3] = S[6]+S[2];
    N[2][2] = -S[0]+S[4]-S[8]; N[2][3] = S[5]+S[7];
    N[3][3] = -S[0]-S[4]+S[8];
    for (int i = 0; i < 4; i++) for (int j = 0; j < i; j++) N[i][j] = N[j][i];
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) V[i][j] = (i == j) ? 1.0 : 0.0;
    for (int sweep = 0; sweep < 20; sweep++)
      for (int p = 0; p < 3; p++)
        for (int q = p + 1; q < 4; q++) begin
          real th, c, s, t, apq;
          apq = N[p][q];
          if (apq == 0.0) continue;
          th = (N[q][q] - N[p][p]) / (2.0 * apq);
          t = (th >= 0 ? 1.0 : -1.0) / ((th >= 0 ? th : -th) + $sqrt(th*th + 1.0));
          c = 1.0 / $sqrt(t*t + 1.0); s = t * c;
          for (int k = 0; k < 4; k++) begin
            real akp, akq;
            akp = N[k][p]; akq = N[k][q];
            N[k][p] = c*akp - s*akq; N[k][q] = s*akp + c*akq;
          end
          for (int k = 0; k < 4; k++) begin
            real apk, aqk;
            apk = N[p][k]; aqk = N[q][k];
            N[p][k] = c*apk - s*aqk; N[q][k] = s*apk + c*aqk;
          end
          for (int k = 0; k < 4; k++) begin
            real vkp, vkq;
            vkp = V[k][p]; vkq = V[k][q];
            V[k][p] = c*vkp - s*vkq; V[k][q] = s*vkp + c*vkq;
          end
        end
    best = 0;
    for (int i = 1; i < 4; i++) if (N[i][i] > N[best][best]) best = i;
    w = V[0][best]; x = V[1][best]; y = V[2][best]; z = V[3][best];
    m = '{w*w+x*x-y*y-z*z, 2*(x*y-w*z), 2*(x*z+w*y),
          2*(x*y+w*z), w*w-x*x+y*y-z*z, 2*(y*z-w*x),
          2*(x*z-w*y), 2*(y*z+w*x), w*w-x*x-y*y+z*z, 0, 0, 0};
    for (int i = 0; i < 3; i++) m[9+i] = qc[i] - (m[3*i]*pc[0] + m[3*i+1]*pc[1] + m[3*i+2]*pc[2]);
    return m;
  endfunction

  task automatic register_once(xf_t truth, xf_t guess, string name);
    xf_t inv, total, inc;
    int it;
    real err_r, err_t, mse;
    logic converged;
    // source: every 16th target point moved by the inverse of the true motion
    inv = inverse(truth);
    for (int i = 0; i < NS; i++) begin
      real v [3], w [3];
      point_t t;
      t = tgt[i * 16 + 3];
      v = '{real'(t.x) / Q16, real'(t.y) / Q16, real'(t.z) / Q16};
      for (int a = 0; a < 3; a++) w[a] = inv[3*a]*v[0] + inv[3*a+1]*v[1] + inv[3*a+2]*v[2] + inv[9+a];
      src_we = 1; src_waddr = 6'(i);
      src_wdata = '{x: coord_t'($rtoi(w[0] * Q16)), y: coord_t'($rtoi(w[1] * Q16)), z: coord_t'($rtoi(w[2] * Q16))};
      @(negedge clk);
    end
    src_we = 0;
    cfg(CFG_NSRC, NS); cfg(CFG_NTGT, NT); cfg(CFG_MAXDIST, 32'd65536);   // 1.0 m
    // initial guess, applied once before ICP
    send_and_transform(guess);
    total = guess;
    converged = 1'b0;
    for (it = 1; it <= 50 && !converged; it++) begin
      real S [9], pc [3], qc [3];
      real n, delta;
      command(OP_SEARCH);
      n = real'(result.count);
      check(result.count > 0, $sformatf("%s: correspondences in iteration %0d", name, it));
      for (int a = 0; a < 3; a++) begin
        pc[a] = acc2r(result.sum_p[a]) / Q16 / n;
        qc[a] = acc2r(result.sum_q[a]) / Q16 / n;
      end
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
        S[3*a+b] = acc2r(result.sum_pq[3*a+b]) / (Q16 * Q16) - n * pc[a] * qc[b];
      mse = acc2r(result.sum_d) / (Q16 * Q16) / n;
      $display("%s: iteration %0d accepted %0d rejected %0d mse %g", name, it, result.count, result.rejected, mse);
      inc = horn_solve(S, pc, qc);
      delta = 0.0;
      for (int k = 0; k < 12; k++) begin
        real d;
        d = inc[k] - ((k == 0 || k == 4 || k == 8) ? 1.0 : 0.0);
        if (d < 0) d = -d;
        if (d > delta) delta = d;
      end
      converged = (delta < 1e-5);
      send_and_transform(inc);
      total = compose(inc, total);
    end
    err_r = 0.0; err_t = 0.0;
    for (int k = 0; k < 9; k++) begin
      real d;
      d = total[k] - truth[k];
      if (d < 0) d = -d;
      if (d > err_r) err_r = d;
    end
    for (int k = 9; k < 12; k++) begin
      real d;
      d = total[k] - truth[k];
      if (d < 0) d = -d;
      if (d > err_t) err_t = d;
    end
    $display("%s: %0d iterations, rotation error %g, translation error %g m, final mse %g m^2, accepted %0d",
             name, it - 1, err_r, err_t, mse, result.count);
    check(converged, $sformatf("%s: converged within 50 iterations", name));
    check(err_r < 1e-4, $sformatf("%s: rotation recovered (%g)", name, err_r));
    check(err_t < 1e-3, $sformatf("%s: translation recovered (%g m)", name, err_t));
    check(mse < 1e-6, $sformatf("%s: final mean squared distance %g", name, mse));
    check(int'(result.count) == NS, $sformatf("%s: all points matched at the end", name));
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xf_t ident;
    ident = '{1.0, 0, 0, 0, 1.0, 0, 0, 0, 1.0, 0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // target: a scene of ground plane, two walls and scattered objects, in a 12 m box
    for (int j = 0; j < NT; j++) begin
      real x, y, z;
      x = real'($urandom % 12000) / 1000.0 - 6.0;
      y = real'($urandom % 12000) / 1000.0 - 6.0;
      z = real'($urandom % 3000) / 1000.0;
      case (j % 4)
        0: z = 0.0;
        1: x = -6.0 + 0.1 * $sin(y);
        2: y = 6.0;
        default: ;
      endcase
      tgt[j] = '{x: coord_t'($rtoi(x * Q16)), y: coord_t'($rtoi(y * Q16)), z: coord_t'($rtoi(z * Q16))};
      tgt_we = 1; tgt_waddr = idx_t'(j); tgt_wdata = tgt[j];
      @(negedge clk);
    end
    tgt_we = 0;
    register_once(from_axis_angle(0.2, 0.3, 1.0, 0.08, 0.4, -0.3, 0.1), ident, "registration 1");
    register_once(from_axis_angle(1.0, -0.5, 0.3, 0.03, -0.3, 0.25, 0.05),
                  from_axis_angle(0, 0, 1.0, 0.01, -0.2, 0.2, 0.0), "registration 2 with initial guess");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
