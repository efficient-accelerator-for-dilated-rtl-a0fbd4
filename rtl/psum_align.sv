// psum_align -- places the partial sums of all PE blocks on the rows of one
// output column and adds those that land on the same row.
//
// Dense / dilated mode: the NBLK blocks are stacked, block b holding input
// rows N*b .. N*b+N-1 of the current column vector. Block b contributes
//   psum_last[i] to row N*b+i-1, psum_mid[N-1] to row N*b+N-1,
//   spill1 to row N*b+N,
// so the diagonals leaving one block are completed by the block below (or
// belong to the zero padding). All of them go to vec0.
//
// Transposed mode: blocks 0, 1 and 2 work on the same row tile 'tile' of N
// input rows; each output row of the stride-2 result is r = 2*N*tile + rel:
//   psum_last[i] -> rel 2i,  psum_mid[i] -> rel 2i-1,  spill1 -> rel 2N-1.
// Blocks 0 and 1 feed the odd output column (vec0), block 2 the even output
// column (vec1); block 3 and up are idle in this mode.
//
// Rows below zero or whose row_mask bit is clear are dropped (zero padding,
// the zero lanes between stacked row phases, and rows past the map). The row arithmetic follows the diagonal sums of the published
// PE block and the published transposed mapping; the stacking of blocks in
// dense mode is this design's choice. Purely combinational.
module psum_align #(
  parameter int unsigned N     = dtc_pkg::N_DEF,
  parameter int unsigned NBLK  = dtc_pkg::NBLK_DEF,
  parameter int unsigned PW    = 2 * dtc_pkg::DW_DEF + 2,
  parameter int unsigned ACC_W = dtc_pkg::ACC_W_DEF,
  parameter int unsigned OUT_H = 2 * N * NBLK,
  parameter int unsigned TW    = $clog2(NBLK + 1)
) (
  input  logic                    transposed,
  input  logic [TW-1:0]           tile,
  input  logic [OUT_H-1:0]        row_mask,
  input  logic signed [PW-1:0]    psum_last [NBLK][N],
  input  logic signed [PW-1:0]    psum_mid  [NBLK][N],
  input  logic signed [PW-1:0]    spill1    [NBLK],
  output logic signed [ACC_W-1:0] vec0 [OUT_H],
  output logic signed [ACC_W-1:0] vec1 [OUT_H]
);

  // True when output row r exists: not in the zero padding and inside the map.
  function automatic logic keep(input int r, input logic [OUT_H-1:0] m);
    return r >= 0 && r < int'(OUT_H) && m[r];
  endfunction

  always_comb begin
    logic [OUT_H-1:0] lim;
    int base;
    int r;
    lim = row_mask;
    for (int rr = 0; rr < int'(OUT_H); rr++) begin
      vec0[rr] = '0;
      vec1[rr] = '0;
    end
    if (!transposed) begin
      for (int b = 0; b < int'(NBLK); b++) begin
        base = int'(N) * b;
        for (int i = 0; i < int'(N); i++) begin
          r = base + i - 1;
          if (keep(r, lim)) vec0[r] += ACC_W'(psum_last[b][i]);
        end
        r = base + int'(N) - 1;
        if (keep(r, lim)) vec0[r] += ACC_W'(psum_mid[b][N-1]);
        r = base + int'(N);
        if (keep(r, lim)) vec0[r] += ACC_W'(spill1[b]);
      end
    end else begin
      base = 2 * int'(N) * int'(tile);
      for (int b = 0; b < 3; b++) begin
        for (int i = 0; i < int'(N); i++) begin
          r = base + 2 * i;
          if (keep(r, lim)) begin
            if (b < 2) vec0[r] += ACC_W'(psum_last[b][i]);
            else       vec1[r] += ACC_W'(psum_last[b][i]);
          end
          r = base + 2 * i - 1;
          if (keep(r, lim)) begin
            if (b < 2) vec0[r] += ACC_W'(psum_mid[b][i]);
            else       vec1[r] += ACC_W'(psum_mid[b][i]);
          end
        end
        r = base + 2 * int'(N) - 1;
        if (keep(r, lim)) begin
          if (b < 2) vec0[r] += ACC_W'(spill1[b]);
          else       vec1[r] += ACC_W'(spill1[b]);
        end
      end
    end
  end

endmodule
