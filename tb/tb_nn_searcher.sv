// tb_nn_searcher: runs the NN searcher (4 x 4 PE array) against memories
// modelled in the testbench, for several cloud sizes, including partial source
// batches and partial target beats, an empty target cloud, and random
// backpressure on the output. Every correspondence is checked, in source
// order, against a brute-force search (lowest index among equal distances).
// A large run checks the batch timing: ceil(n_src/COLS) * (ceil(n_tgt/ROWS)+5)
// cycles plus a fill and drain of at most 4*COLS + 10 cycles, and no read
// stall after the first batch. Result stalls must occur in the small runs.
module tb_nn_searcher;
  import fpps_pkg::*;
  localparam int ROWS = 4, COLS = 4, TGT_DEPTH = 256, SRC_DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0, busy, done;
  logic [6:0] n_src;
  logic [8:0] n_tgt;
  logic src_rd_en, tgt_rd_en;
  logic [5:0] src_rd_addr;
  logic [5:0] tgt_rd_addr;
  point_t src_rd_data;
  point_t [ROWS-1:0] tgt_rd_data;
  logic out_valid, out_ready = 1;
  corr_t out_data;
  logic [CNT_W-1:0] stat_read_stall, stat_result_stall;
  int checks = 0, failures = 0, result_stalls = 0, bp_cycles = 0;

  point_t src_mem [SRC_DEPTH];
  point_t tgt_mem [TGT_DEPTH];

  nn_searcher #(.ROWS(ROWS), .COLS(COLS), .TGT_DEPTH(TGT_DEPTH), .SRC_DEPTH(SRC_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (src_rd_en) src_rd_data <= src_mem[src_rd_addr];
    if (tgt_rd_en) for (int r = 0; r < ROWS; r++) tgt_rd_data[r] <= tgt_mem[tgt_rd_addr * ROWS + r];
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic dist_t sqd(point_t a, point_t b);
    longint dx, dy, dz;
    dx = longint'(a.x) - longint'(b.x);
    dy = longint'(a.y) - longint'(b.y);
    dz = longint'(a.z) - longint'(b.z);
    return dist_t'(dx * dx) + dist_t'(dy * dy) + dist_t'(dz * dz);
  endfunction

  function automatic coord_t rc(int spread);
    return coord_t'(int'($urandom % spread) - spread / 2) * 32'sd65536;
  endfunction

  task automatic run(int ns, int nt, int spread, int bp_pct, output int cycles);
    int got;
    for (int i = 0; i < SRC_DEPTH; i++) src_mem[i] = '{x: rc(spread), y: rc(spread), z: rc(spread)};
    for (int i = 0; i < TGT_DEPTH; i++) tgt_mem[i] = '{x: rc(spread), y: rc(spread), z: rc(spread)};
    n_src = 7'(ns); n_tgt = 9'(nt);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    got = 0;
    while (!done) begin
      out_ready = ($urandom % 100) >= bp_pct;
      if (out_valid && !out_ready) bp_cycles++;
      if (out_valid && out_ready) begin
        nn_cand_t e;
        e = '{found: 1'b0, idx: '0, q: '0, d2: '1};
        for (int j = 0; j < nt; j++) begin
          dist_t d;
          d = sqd(src_mem[got], tgt_mem[j]);
          if (!e.found || d < e.d2) e = '{found: 1'b1, idx: idx_t'(j), q: tgt_mem[j], d2: d};
        end
        check(got < ns, "no extra correspondences");
        check(out_data.p == src_mem[got], $sformatf("source point %0d (ns=%0d nt=%0d)", got, ns, nt));
        check(out_data.nn.found == e.found && (!e.found || out_data.nn == e),
              $sformatf("nn of %0d: idx %0d vs %0d (ns=%0d nt=%0d)", got, out_data.nn.idx, e.idx, ns, nt));
        got++;
      end
      @(negedge clk);
      cycles++;
    end
    out_ready = 1;
    check(got == ns, $sformatf("got %0d of %0d correspondences", got, ns));
    check(!busy, "idle after done");
    result_stalls += int'(stat_result_stall);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nb, nbeats;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(16, 16, 8, 0, cyc);
    run(13, 10, 6, 30, cyc);
    run(1, 7, 6, 0, cyc);
    run(7, 0, 6, 0, cyc);
    run(64, 256, 20, 50, cyc);
    check(result_stalls > 0, "result stalls occurred");
    // timing with many beats per batch and no backpressure
    run(37, 255, 30, 0, cyc);
    nb = (37 + COLS - 1) / COLS;
    nbeats = (255 + ROWS - 1) / ROWS;
    check(cyc >= nb * (nbeats + 5) && cyc <= nb * (nbeats + 5) + 4 * COLS + 10,
          $sformatf("search took %0d cycles, batch model %0d", cyc, nb * (nbeats + 5)));
    check(int'(stat_read_stall) <= COLS + 3, $sformatf("read stall %0d only on the first batch", stat_read_stall));
    check(int'(stat_result_stall) == 0, "no result stall with long batches");
    check(bp_cycles > 0, "backpressure occurred");
    $display("search of 37 x 255 points: %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
