// tb_stream_fifo: randomised push/pop test of stream_fifo against a queue model.
// Checks data order, in_ready (low exactly when DEPTH words are held),
// out_valid and count on every cycle, and that both full and empty occurred.
module tb_stream_fifo;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, saw_full = 0, saw_empty = 0, pops = 0;
  logic [15:0] model[$];
  logic hold = 1'b0;

  stream_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s t=%0t cnt=%0d model=%0d iv=%b ir=%b ov=%b or=%b", what, $time, count, model.size(), in_valid, in_ready, out_valid, out_ready);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phases: fill-heavy, drain-heavy, balanced
      // a word offered but not taken must be offered again unchanged
      if (!hold) begin
      in_valid  = ($urandom % 100) < ((cyc / 500) % 3 == 0 ? 85 : (cyc / 500) % 3 == 1 ? 15 : 50);
      in_data   = 16'($urandom);
      end
      out_ready = ($urandom % 100) < ((cyc / 500) % 3 == 0 ? 15 : (cyc / 500) % 3 == 1 ? 85 : 50);

      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      check(int'(count) == model.size(), "count");
      if (model.size() == DEPTH) saw_full++;
      if (model.size() == 0) saw_empty++;
      if (out_valid && model.size() > 0) check(out_data == model[0], "data order");
      begin
        logic do_pop, do_push;
        hold    = in_valid && !in_ready;
        do_pop  = out_valid && out_ready;
        do_push = in_valid && in_ready;
        @(posedge clk);
        if (do_pop) begin
          void'(model.pop_front());
          pops++;
        end
        if (do_push) model.push_back(in_data);
      end
      #1;
    end
    check(saw_empty > 0 && pops > 500 && saw_full > 0, "coverage of full, empty and traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
