// tb_nn_pe: drives one processing element with batches of random target
// points (drawn from a small set so that equal distances occur), with gaps and
// batches whose first beat is invalid. A reference model of the MIN registers
// (strictly smaller distance replaces, first beat restarts) is updated in the
// cycle each input is applied, and best is compared three cycles later.
module tb_nn_pe;
  import fpps_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, in_first = 0;
  point_t q = '0, p = '0;
  idx_t q_idx = '0;
  nn_cand_t best;
  int checks = 0, failures = 0, updates = 0, ties = 0;
  nn_cand_t hist [$];

  nn_pe dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic dist_t sqd(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x);
    dy = longint'(a.y) - longint'(b.y);
    dz = longint'(a.z) - longint'(b.z);
    // each square fits in 64 bits unsigned for the ranges used here
    return dist_t'(dx * dx) + dist_t'(dy * dy) + dist_t'(dz * dz);
  endfunction

  function automatic coord_t rc();
    return coord_t'(($urandom % 9) - 4) * 32'sd100_000;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nn_cand_t m;
    m = '{found: 1'b0, idx: '0, q: '0, d2: '1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 40; batch++) begin
      p = '{x: rc(), y: rc(), z: rc()};
      for (int b = 0; b < 30; b++) begin
        in_first = (b == 0);
        in_valid = (b == 0 && batch % 5 == 3) ? 1'b0 : (($urandom % 4) != 0);
        q        = '{x: rc(), y: rc(), z: rc()};
        q_idx    = idx_t'(batch * 64 + b);
        if (in_first) m = '{found: 1'b0, idx: '0, q: '0, d2: '1};
        if (in_valid) begin
          dist_t d;
          d = sqd(p, q);
          if (m.found && d == m.d2) ties++;
          if (!m.found || d < m.d2) begin
            m = '{found: 1'b1, idx: q_idx, q: q, d2: d};
            updates++;
          end
        end
        hist.push_back(m);
        if (hist.size() > 3) begin
          nn_cand_t e;
          e = hist.pop_front();
          check(best.found == e.found && (!e.found || best == e), $sformatf("batch %0d beat %0d", batch, b));
        end
        @(negedge clk);
        // p must stay until the batch's last beat has passed the distance stages
      end
    end
    in_valid = 0; in_first = 0;
    while (hist.size() > 0) begin
      nn_cand_t e;
      e = hist.pop_front();
      check(best.found == e.found && (!e.found || best == e), "tail");
      @(negedge clk);
    end
    check(updates > 100 && ties > 0, $sformatf("coverage updates=%0d ties=%0d", updates, ties));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
