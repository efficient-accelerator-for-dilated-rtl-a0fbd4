// pe_block -- one n x 3 MAC array.
//
// Each row i receives element x[i] of the current input column vector; each
// of the three PE columns k receives weight w[k] (one weight column vector,
// broadcast down the column). PE(i,k) multiplies x[i]*w[k]. Products are summed
// along the diagonal: PE(i,1) adds the product of PE(i-1,0), PE(i,2) adds the
// sum of PE(i-1,1). With kernel column (w0,w1,w2) the outputs of PE column 2 are
// therefore a 1-D 3-tap filter down the input column:
//   psum_last[i] = x[i-2]*w0 + x[i-1]*w1 + x[i]*w2.
// The two diagonals that leave the bottom of the block are brought out too
// (psum_mid[N-1] and spill1), so a block stacked under this one, or the
// accumulator, can complete the last rows.
//
// This multiply/diagonal-add structure is the published PE block. One
// addition is this design's own: the 'transposed' input cuts the link from
// the column-1 adders into the column-2 adders, and the column-1 adder
// outputs are brought out as psum_mid[]. That is needed to reproduce the
// published transposed-convolution mapping, where the third PE column
// carries an independent output (the centre weight) while the first two
// columns form a 2-tap diagonal:
//   psum_mid[i] = x[i-1]*w0 + x[i]*w1,   psum_last[i] = x[i]*w2   (transposed)
// (PE columns are numbered 0..2 here.)
//
// Timing: all outputs are registered; results for operands presented with
// en=1 in cycle t appear with valid=1 in cycle t+1. Throughput one vector
// per cycle.
module pe_block #(
  parameter int unsigned N  = dtc_pkg::N_DEF,
  parameter int unsigned DW = dtc_pkg::DW_DEF,
  parameter int unsigned PW = 2 * DW + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 transposed,
  input  logic signed [DW-1:0] x [N],
  input  logic signed [DW-1:0] w [3],
  output logic signed [PW-1:0] psum_last [N],
  output logic signed [PW-1:0] psum_mid [N],
  output logic signed [PW-1:0] spill1,
  output logic                 valid
);

  logic signed [2*DW-1:0] prod [N][3];
  logic signed [PW-1:0]   sum_mid [N];   // adder of PE column 1
  logic signed [PW-1:0]   sum_last [N];   // adder of PE column 2

  always_comb begin
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < 3; k++) begin
        prod[i][k] = x[i] * w[k];
      end
    end
    for (int i = 0; i < N; i++) begin
      sum_mid[i] = PW'(prod[i][1]);
      if (i > 0) sum_mid[i] += PW'(prod[i-1][0]);
    end
    for (int i = 0; i < N; i++) begin
      sum_last[i] = PW'(prod[i][2]);
      if (i > 0 && !transposed) sum_last[i] += sum_mid[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= 1'b0;
      spill1 <= '0;
      for (int i = 0; i < N; i++) begin
        psum_last[i] <= '0;
        psum_mid[i] <= '0;
      end
    end else begin
      valid <= en;
      if (en) begin
        spill1 <= PW'(prod[N-1][0]);
        for (int i = 0; i < N; i++) begin
          psum_last[i] <= sum_last[i];
          psum_mid[i] <= sum_mid[i];
        end
      end
    end
  end

endmodule
