// point_reg: one 3 x 256 point register (R0, R1 or Rt of the ladder).
//
// Holds a projective point (x, y, z), one 256-bit word per coordinate. Each
// word has its own write enable so that the inversion unit, which uses the
// words of R1 and Rt as independent working registers, can update them one
// at a time; during the ladder all three words are written together.
//
// Interface: we[0] writes x, we[1] writes y, we[2] writes z from d on the
// rising clock edge; q shows the stored point. Reset clears all words.
//
// The size (3 x 256) is printed in the paper's figure; the per-word enables
// and the reset value are this design's own choices.
module point_reg
  import secp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] we,
  input  point_t     d,
  output point_t     q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else begin
      if (we[0]) q.x <= d.x;
      if (we[1]) q.y <= d.y;
      if (we[2]) q.z <= d.z;
    end
  end

endmodule
