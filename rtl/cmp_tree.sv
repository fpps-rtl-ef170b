// cmp_tree: comparison tree that picks the nearest neighbour of one column.
//
// Takes the N candidates held by the PEs of one column and reduces them pair
// by pair in a binary tree to the single best candidate: the nearest found
// target point, and among equal distances the one with the lower index (see
// fpps_pkg::cand_better). Each tree level is one register stage, so
// out_best/out_valid follow in_cand/in_valid by clog2(N) cycles, and a new set
// of candidates can enter every cycle. Inputs beyond N are padded with empty
// candidates. The tree follows the source description ("CMP TR"); its binary
// shape, the register per level and the tie rule are this design's choices.
module cmp_tree
  import fpps_pkg::*;
#(
  parameter int N = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  nn_cand_t [N-1:0]   in_cand,
  output logic               out_valid,
  output nn_cand_t           out_best
);
  localparam int L = (N > 1) ? $clog2(N) : 1;
  localparam int W = 1 << L;

  localparam nn_cand_t EMPTY = '{found: 1'b0, idx: '0, q: '0, d2: '1};

  // level l holds W >> l candidates; level 0 is the padded input
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    nn_cand_t c [W >> l];
    logic     v;
    if (l == 0) begin : g_in
      always_comb begin
        for (int i = 0; i < W; i++) c[i] = (i < N) ? in_cand[i] : EMPTY;
      end
      assign v = in_valid;
    end else begin : g_red
      always_ff @(posedge clk) begin
        for (int i = 0; i < (W >> l); i++)
          c[i] <= cand_better(g_lvl[l-1].c[2*i+1], g_lvl[l-1].c[2*i]) ? g_lvl[l-1].c[2*i+1]
                                                                     : g_lvl[l-1].c[2*i];
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) v <= 1'b0;
        else        v <= g_lvl[l-1].v;
      end
    end
  end

  assign out_best  = g_lvl[L].c[0];
  assign out_valid = g_lvl[L].v;
endmodule
