// input_buffer -- on-chip store of input column vectors.
//
// One word holds one column vector of LANES elements (LANES = rows of all
// stacked PE blocks). After input decomposition, word c holds input column
// c with its row phases stacked (see input_decomposer). Elements are
// written one lane at a time by the decomposer; two independent read ports
// each return a whole word.
//
// Read data is registered (one cycle latency, like a synchronous SRAM). A
// disabled read port returns zeros, and lanes whose rmask bit is clear read
// as zero: this supplies the zero lanes between row phases and the padding
// below the last row without clearing the memory. The published chip uses foundry SRAM (191 KB in total, split not
// given); this is a register-array model of the same function, with a
// word organisation chosen by this design.
module input_buffer #(
  parameter int unsigned DW    = dtc_pkg::DW_DEF,
  parameter int unsigned LANES = dtc_pkg::N_DEF * dtc_pkg::NBLK_DEF,
  parameter int unsigned DEPTH = 2 * dtc_pkg::MAX_W_DEF,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned LW    = $clog2(LANES + 1)
) (
  input  logic                 clk,
  // write port, one element
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [LW-1:0]        wlane,
  input  logic signed [DW-1:0] wdata,
  // two read ports, whole column vectors
  input  logic                 re    [2],
  input  logic [AW-1:0]        raddr [2],
  input  logic [LANES-1:0]     rmask,
  output logic signed [DW-1:0] rdata [2][LANES]
);

  logic signed [DW-1:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < int'(DEPTH) && int'(wlane) < int'(LANES)) mem[waddr][wlane] <= wdata;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      for (int l = 0; l < int'(LANES); l++) begin
        if (re[p] && rmask[l] && int'(raddr[p]) < int'(DEPTH)) rdata[p][l] <= mem[raddr[p]][l];
        else rdata[p][l] <= '0;
      end
    end
  end

endmodule
