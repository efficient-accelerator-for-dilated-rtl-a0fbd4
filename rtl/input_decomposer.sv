// input_decomposer -- splits a raster-order input map into the (1+D)^2
// sub-sampled blocks used for dilated convolution, as it is written into the
// input buffer.
//
// Element (r,c) of an H x W map belongs to block (r mod (D+1), c mod (D+1))
// at position (r div (D+1), c div (D+1)). Each block is an ordinary input map
// for a dense 3x3 convolution with one zero of padding. The decomposition is
// the published method. So is the way the blocks are fed: all row phases of
// one column are stacked into a single column vector, e.g. a1 a3 a5 a7 a2 a4
// a6 for D = 1. Here each row phase is followed by one zero lane, so that the
// diagonal sums of the PE array never mix two phases; that zero lane is this
// design's choice. The layout is:
//   word  = c (the original column; the controller steps c by D+1),
//   lane  = phase_offset(r mod (D+1)) + r div (D+1),
// with phase_offset(p) = p*(H div (D+1) + 1) + min(p, H mod (D+1)). The
// zero lanes are never written; the buffer masks them on read. A column
// uses H + min(D+1,H) - 1 lanes, which must not exceed LANES. Row phase and
// row-in-phase are counters; one division at start gives H div/mod (D+1).
//
// Interface: pulse 'start' with dil (D), img_h and img_w stable; then send
// H*W elements in raster order on in_valid/in_data (always accepted, one
// per cycle at most). 'done' pulses with the write of the last element.
// For transposed convolution the caller passes D = 0 (no decomposition).
module input_decomposer #(
  parameter int unsigned DW    = dtc_pkg::DW_DEF,
  parameter int unsigned LANES = dtc_pkg::N_DEF * dtc_pkg::NBLK_DEF,
  parameter int unsigned MAX_W = dtc_pkg::MAX_W_DEF,
  parameter int unsigned DEPTH = 2 * MAX_W,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned LW    = $clog2(LANES + 1),
  parameter int unsigned XW    = 8   // width of image sizes and of D
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [XW-1:0]        dil,
  input  logic [XW-1:0]        img_h,
  input  logic [XW-1:0]        img_w,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 busy,
  output logic                 done,
  output logic                 we,
  output logic [AW-1:0]        waddr,
  output logic [LW-1:0]        wlane,
  output logic signed [DW-1:0] wdata
);

  import dtc_pkg::*;

  logic [XW-1:0] row, col, phase, lane;
  logic [XW-1:0] d_q, h_q, w_q, hq_q, hr_q;

  always_comb begin
    we    = busy && in_valid;
    waddr = AW'(col);
    wlane = LW'(phase_offset(int'(phase), int'(hq_q), int'(hr_q)) + int'(lane));
    wdata = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      row <= '0; col <= '0; phase <= '0; lane <= '0;
      d_q <= '0; h_q <= '0; w_q <= '0; hq_q <= '0; hr_q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        row <= '0; col <= '0; phase <= '0; lane <= '0;
        d_q <= dil; h_q <= img_h; w_q <= img_w;
        hq_q <= XW'(int'(img_h) / (int'(dil) + 1));
        hr_q <= XW'(int'(img_h) % (int'(dil) + 1));
      end else if (busy && in_valid) begin
        if (col == w_q - 1'b1) begin
          col <= '0;
          row <= row + 1'b1;
          if (phase == d_q) begin
            phase <= '0;
            lane  <= lane + 1'b1;
          end else begin
            phase <= phase + 1'b1;
          end
          if (row == h_q - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
