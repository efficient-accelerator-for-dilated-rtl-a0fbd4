// weight_router -- kernel store and weight distribution to the PE blocks.
//
// Holds one 3x3 kernel W[u][v] (u = kernel row 0..2, v = kernel column
// a,b,c = 0..2), loaded one element at a time in row-major order. Every
// cycle it drives the three weight ports of every PE block:
//
// * dense / dilated: all blocks get the same weight column vector
//   (W[0][k], W[1][k], W[2][k]), where k is chosen by the controller; the
//   controller steps k through the columns a, b, c for each input column.
// * transposed: the kernel is decomposed into its corner (2x2), horizontal
//   (1x2), vertical (2x1) and centre (1x1) parts. They are mapped so that
//   each block needs only one input column:
//     block 0: (W[0][0], W[2][0], W[1][0])   column a  -> odd output column
//     block 1: (W[0][2], W[2][2], W[1][2])   column c  -> odd output column
//     block 2: (W[0][1], W[2][1], W[1][1])   column b  -> even output column
//   Blocks 3 and up get zeros. With the PE diagonal cut after the second PE
//   column, the first two weights act on odd output rows (corner and
//   vertical parts), the third on even output rows (horizontal and centre).
//   This assignment is the published one for a 3-block example; idling
//   the extra blocks is this design's choice.
//
// Timing: outputs are registered, so weights selected in cycle t reach the
// PE blocks in cycle t+1, together with the input buffer's read data.
module weight_router #(
  parameter int unsigned DW   = dtc_pkg::DW_DEF,
  parameter int unsigned NBLK = dtc_pkg::NBLK_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // kernel load, index u*3+v
  input  logic                 w_we,
  input  logic [3:0]           w_idx,
  input  logic signed [DW-1:0] w_data,
  // per-cycle selection
  input  logic                 transposed,
  input  logic [1:0]           kcol,
  output logic signed [DW-1:0] w_blk [NBLK][3]
);

  logic signed [DW-1:0] kern [3][3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < 3; u++)
        for (int v = 0; v < 3; v++) kern[u][v] <= '0;
    end else if (w_we && w_idx < 4'd9) begin
      kern[w_idx / 3][w_idx % 3] <= w_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < int'(NBLK); b++)
        for (int k = 0; k < 3; k++) w_blk[b][k] <= '0;
    end else begin
      for (int b = 0; b < int'(NBLK); b++) begin
        for (int k = 0; k < 3; k++) w_blk[b][k] <= '0;
        if (!transposed) begin
          for (int u = 0; u < 3; u++) w_blk[b][u] <= kern[u][(kcol > 2'd2) ? 2 : kcol];
        end else if (b < 3) begin
          // kernel column used by this block: a, c, b
          w_blk[b][0] <= kern[0][(b == 0) ? 0 : (b == 1) ? 2 : 1];
          w_blk[b][1] <= kern[2][(b == 0) ? 0 : (b == 1) ? 2 : 1];
          w_blk[b][2] <= kern[1][(b == 0) ? 0 : (b == 1) ? 2 : 1];
        end
      end
    end
  end

endmodule
