// stream_fifo: synchronous valid/ready FIFO linking two pipeline stages.
//
// The NN searcher is a streaming pipeline whose stages are joined by FIFOs;
// this is that FIFO. It stores up to DEPTH words of any type T in a circular
// buffer with read and write pointers and an occupancy counter. The head word
// is presented on out_data with out_valid (first-word fall-through); a word
// moves on any cycle where valid and ready are both high. in_ready is low only
// when the FIFO is full, so a push and a pop may happen in the same cycle.
// Depth and handshake are this design's choices.
module stream_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= next_ptr(wptr);
      if (pop)  rptr <= next_ptr(rptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid && !in_ready |-> ##1 in_valid)
    else $error("stream_fifo: producer dropped a word that was not accepted");
endmodule
