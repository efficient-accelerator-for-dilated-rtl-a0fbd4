// output_stitcher -- reads the accumulated result back as one raster-order
// output map.
//
// For an OH x OW output computed with D inserted zeros, output (r,c) sits
// in accumulator word c, lane phase_offset(r mod (D+1)) + r div (D+1):
// the row phases are stacked in one column with a zero lane between them,
// the same layout the input_decomposer writes (D = 0 for dense and
// transposed work, so the word is the column and the lane the row). Row
// phase and lane are counters; the phase offsets need one division at
// start. Reading
// in raster order is what puts the independently computed decomposed blocks
// back together into the output map.
//
// Interface: pulse 'start' with dil, out_h, out_w stable. One read is
// issued per cycle; out_valid/out_data follow the accumulator's one-cycle
// read latency, and out_last marks the final element. There is no
// back-pressure (a choice of this design; the source does not describe the
// output interface).
module output_stitcher
  import dtc_pkg::*;
#(
  parameter int unsigned ACC_W = dtc_pkg::ACC_W_DEF,
  parameter int unsigned MAX_W = dtc_pkg::MAX_W_DEF,
  parameter int unsigned OUT_H = 2 * dtc_pkg::N_DEF * dtc_pkg::NBLK_DEF,
  parameter int unsigned DEPTH = 2 * MAX_W,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned LW    = $clog2(OUT_H + 1),
  parameter int unsigned XW    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [XW-1:0]           dil,
  input  logic [XW-1:0]           out_h,
  input  logic [XW-1:0]           out_w,
  output logic                    busy,
  // accumulator read port
  output logic                    rd_en,
  output logic [AW-1:0]           rd_addr,
  output logic [LW-1:0]           rd_lane,
  input  logic                    rd_valid,
  input  logic signed [ACC_W-1:0] rd_data,
  // raster output stream
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data,
  output logic                    out_last
);

  logic [XW-1:0] row, col, phase, lane;
  logic [XW-1:0] d_q, h_q, w_q, hq_q, hr_q;
  logic          last_q;

  always_comb begin
    rd_en   = busy;
    rd_addr = AW'(col);
    rd_lane = LW'(phase_offset(int'(phase), int'(hq_q), int'(hr_q)) + int'(lane));
    out_valid = rd_valid;
    out_data  = rd_data;
    out_last  = rd_valid && last_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; last_q <= 1'b0;
      row <= '0; col <= '0; phase <= '0; lane <= '0;
      d_q <= '0; h_q <= '0; w_q <= '0; hq_q <= '0; hr_q <= '0;
    end else begin
      last_q   <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        row <= '0; col <= '0; phase <= '0; lane <= '0;
        d_q <= dil; h_q <= out_h; w_q <= out_w;
        hq_q <= XW'(int'(out_h) / (int'(dil) + 1));
        hr_q <= XW'(int'(out_h) % (int'(dil) + 1));
      end else if (busy) begin
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
            busy   <= 1'b0;
            last_q <= 1'b1;
          end
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
