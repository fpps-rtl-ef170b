// tb_cmp_tree: feeds a new random candidate set every cycle (some candidates
// missing, many equal distances) into a 6-input tree, which exercises the
// padding to 8, and compares each output, clog2(8) = 3 cycles later, with a
// linear scan: the nearest found candidate, lowest index among equals.
module tb_cmp_tree;
  import fpps_pkg::*;
  localparam int N = 6, LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, out_valid;
  nn_cand_t [N-1:0] in_cand;
  nn_cand_t out_best;
  int checks = 0, failures = 0, tie_cases = 0, none_cases = 0;
  nn_cand_t exp_q [$];
  logic     vq [$];

  cmp_tree #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      nn_cand_t e;
      int nbest;
      in_valid = ($urandom % 5) != 0;
      for (int i = 0; i < N; i++) begin
        in_cand[i].found = ($urandom % 100) < ((t % 7 == 0) ? 0 : 70);
        in_cand[i].idx   = idx_t'($urandom % 1000);
        in_cand[i].q     = '{x: coord_t'($urandom), y: coord_t'($urandom), z: coord_t'($urandom)};
        in_cand[i].d2    = dist_t'($urandom % 4);
      end
      // reference: linear scan
      e = '{found: 1'b0, idx: '0, q: '0, d2: '1};
      nbest = 0;
      for (int i = 0; i < N; i++) begin
        if (!in_cand[i].found) continue;
        if (!e.found || in_cand[i].d2 < e.d2 || (in_cand[i].d2 == e.d2 && in_cand[i].idx < e.idx))
          e = in_cand[i];
      end
      for (int i = 0; i < N; i++) if (in_cand[i].found && e.found && in_cand[i].d2 == e.d2) nbest++;
      if (nbest > 1) tie_cases++;
      if (!e.found) none_cases++;
      exp_q.push_back(e);
      vq.push_back(in_valid);
      if (exp_q.size() > LAT) begin
        nn_cand_t x;
        logic v;
        x = exp_q.pop_front();
        v = vq.pop_front();
        check(out_valid == v, "valid delay");
        check(out_best.found == x.found && (!x.found || out_best == x), $sformatf("result at %0d", t));
      end
      @(negedge clk);
    end
    check(tie_cases > 100 && none_cases > 50, "coverage of ties and empty columns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
