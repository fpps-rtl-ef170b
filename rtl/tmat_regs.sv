// tmat_regs: register bank for the rigid transformation matrix T.
//
// Holds the 3x4 matrix [R | t] used by the point cloud transformer. The host
// writes one 32-bit entry per cycle: address k (0..11) is row k/4, column k%4,
// so addresses 3, 7 and 11 are the translation. Rotation entries are Q2.30,
// translation entries Q16.16. Writes to addresses 12..15 are ignored. After
// reset the matrix is the identity, so a transform issued before any write
// leaves the cloud unchanged. Entry formats and reset value are this design's
// choices.
module tmat_regs
  import fpps_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [3:0]  addr,
  input  mat_t        wdata,
  output tmat_t       tmat
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 12; k++) tmat[k] <= (k % 5 == 0) ? MAT_ONE : '0;
    end else if (we && addr < 4'd12) begin
      tmat[addr] <= wdata;
    end
  end
endmodule
