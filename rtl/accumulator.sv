// accumulator -- output buffer that accumulates column vectors of partial
// sums.
//
// Each word holds one output column of OUT_H accumulators. In every cycle
// each of the two update ports may add a whole vector of partial sums into
// one word (read-modify-write in the same cycle, so back-to-back updates of
// the same word need no forwarding). Two ports are needed because a
// transposed convolution produces an odd and an even output column per
// cycle; dense and dilated work use port 0 only. If both ports address the
// same word, both vectors are added.
//
// Word addressing follows the input buffer: for dilated work, word c holds
// output column c with the row phases stacked; lane phase_offset(p) + i is
// output row p + i(D+1). Writing each result straight to this target address is what
// stitches the decomposed blocks back into one output map; the raster
// reader (output_stitcher) undoes the row phase. For transposed work the
// word is simply the output column and the lane the output row.
//
// 'clear' zeroes every accumulator in one cycle. Leaving it low between
// runs sums several runs (for example several input channels) into the
// same output. The read port returns one accumulator, registered.
// That partial sums are accumulated here is published; widths, port count
// and the clear/read interface are this design's choices. The array is a
// register model of what would be SRAM in silicon.
module accumulator #(
  parameter int unsigned ACC_W = dtc_pkg::ACC_W_DEF,
  parameter int unsigned OUT_H = 2 * dtc_pkg::N_DEF * dtc_pkg::NBLK_DEF,
  parameter int unsigned DEPTH = 2 * dtc_pkg::MAX_W_DEF,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned LW    = $clog2(OUT_H + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    upd_en   [2],
  input  logic [AW-1:0]           upd_addr [2],
  input  logic signed [ACC_W-1:0] upd_vec  [2][OUT_H],
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  input  logic [LW-1:0]           rd_lane,
  output logic                    rd_valid,
  output logic signed [ACC_W-1:0] rd_data
);

  // One packed word per output column; lane l is bits [l*ACC_W +: ACC_W].
  logic [OUT_H*ACC_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int a = 0; a < int'(DEPTH); a++) mem[a] <= '0;
    end else begin
      for (int l = 0; l < int'(OUT_H); l++) begin
        if (upd_en[0] && upd_en[1] && upd_addr[0] == upd_addr[1]) begin
          if (int'(upd_addr[0]) < int'(DEPTH))
            mem[upd_addr[0]][l*ACC_W +: ACC_W] <= mem[upd_addr[0]][l*ACC_W +: ACC_W] + upd_vec[0][l] + upd_vec[1][l];
        end else begin
          for (int p = 0; p < 2; p++)
            if (upd_en[p] && int'(upd_addr[p]) < int'(DEPTH))
              mem[upd_addr[p]][l*ACC_W +: ACC_W] <= mem[upd_addr[p]][l*ACC_W +: ACC_W] + upd_vec[p][l];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        if (int'(rd_addr) < int'(DEPTH) && int'(rd_lane) < int'(OUT_H)) rd_data <= mem[rd_addr][int'(rd_lane)*ACC_W +: ACC_W];
        else rd_data <= '0;
      end
    end
  end

endmodule
