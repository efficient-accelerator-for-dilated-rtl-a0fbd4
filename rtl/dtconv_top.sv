// dtconv_top -- dense 3x3 convolution engine that also runs dilated and
// transposed convolutions without computing on inserted zeros.
//
// The datapath is NBLK stacked PE blocks of N x 3 MACs (default 4 x 14 x 3 =
// 168 MACs per cycle). A dilated convolution with D inserted zeros is run
// as (D+1)^2 dense convolutions on sub-sampled blocks of the input, with
// the row phases stacked in one column vector so that all blocks of one
// column phase are convolved together; a
// transposed (stride-2) convolution is run with the 3x3 kernel split into
// its corner, edge and centre parts, three PE blocks each taking one part
// and one input column. Results are accumulated into an output buffer at
// their target address and read back in raster order.
//
// Data path and timing (one issue per cycle, no stalls):
//   cycle t   conv_controller issues input word address(es), weight column
//             and target output column
//   cycle t+1 input_buffer word(s) and weight_router weights reach the
//             PE blocks (both registered)
//   cycle t+2 PE block outputs (registered) pass through psum_align and
//             are added into the accumulator at the end of the cycle
// conv_done pulses once the last update has been written.
//
// Use:
//   1. load the kernel: nine w_we writes, index u*3+v (row-major).
//   2. set cfg_*; pulse in_start and stream the H x W input map in raster
//      order on in_valid/in_data (wait for in_done).
//   3. pulse acc_clear (omit to add onto the previous result, e.g. for
//      another input channel), then pulse conv_start and wait for conv_done.
//   4. pulse out_start; the output map streams out in raster order on
//      out_valid/out_data (H x W for dilated, (2H-1) x (2W-1) for
//      transposed), out_last on the final element.
// The PE structure, decomposition and scheduling follow the published
// design; buffer organisation, host interface and sizes other than the
// 16-bit data width are this design's own.
module dtconv_top #(
  parameter int unsigned DW    = dtc_pkg::DW_DEF,
  parameter int unsigned N     = dtc_pkg::N_DEF,
  parameter int unsigned NBLK  = dtc_pkg::NBLK_DEF,
  parameter int unsigned ACC_W = dtc_pkg::ACC_W_DEF,
  parameter int unsigned MAX_W = dtc_pkg::MAX_W_DEF,
  parameter int unsigned DMAX  = dtc_pkg::DMAX_DEF,
  parameter int unsigned XW    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  dtc_pkg::mode_e          cfg_mode,
  input  logic [XW-1:0]           cfg_dil,
  input  logic [XW-1:0]           cfg_h,
  input  logic [XW-1:0]           cfg_w,
  // kernel load
  input  logic                    w_we,
  input  logic [3:0]              w_idx,
  input  logic signed [DW-1:0]    w_data,
  // input map load
  input  logic                    in_start,
  input  logic                    in_valid,
  input  logic signed [DW-1:0]    in_data,
  output logic                    in_busy,
  output logic                    in_done,
  // computation
  input  logic                    acc_clear,
  input  logic                    conv_start,
  output logic                    conv_busy,
  output logic                    conv_done,
  output logic [31:0]             conv_cycles,
  // output map read-out
  input  logic                    out_start,
  output logic                    out_busy,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data,
  output logic                    out_last
);

  import dtc_pkg::*;

  localparam int unsigned LANES = N * NBLK;
  localparam int unsigned OUT_H = 2 * LANES;
  localparam int unsigned DEPTH = 2 * MAX_W;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned LW    = $clog2(LANES + 1);
  localparam int unsigned OLW   = $clog2(OUT_H + 1);
  localparam int unsigned TW    = $clog2(NBLK + 1);
  localparam int unsigned PW    = 2 * DW + 2;

  logic transposed_cfg;
  assign transposed_cfg = (cfg_mode == MODE_TRANSPOSED);

  // ---------------------------------------------------------------- input side
  logic                 ib_we;
  logic [AW-1:0]        ib_waddr;
  logic [LW-1:0]        ib_wlane;
  logic signed [DW-1:0] ib_wdata;

  input_decomposer #(.DW(DW), .LANES(LANES), .MAX_W(MAX_W), .DEPTH(DEPTH), .XW(XW)) u_decomp (
    .clk, .rst_n,
    .start   (in_start),
    .dil     (transposed_cfg ? '0 : cfg_dil),
    .img_h   (cfg_h),
    .img_w   (cfg_w),
    .in_valid, .in_data,
    .busy    (in_busy),
    .done    (in_done),
    .we      (ib_we),
    .waddr   (ib_waddr),
    .wlane   (ib_wlane),
    .wdata   (ib_wdata)
  );

  // ---------------------------------------------------------------- control
  logic            c_busy, c_done, c_issue, c_tr;
  logic            c_rd_en   [2];
  logic [AW-1:0]   c_rd_addr [2];
  logic [LANES-1:0] c_rmask;
  logic [1:0]      c_kcol;
  logic [TW-1:0]   c_tile;
  logic            c_upd_en   [2];
  logic [AW-1:0]   c_upd_addr [2];
  logic [OUT_H-1:0] c_row_mask;

  conv_controller #(.N(N), .NBLK(NBLK), .MAX_W(MAX_W), .DMAX(DMAX), .DEPTH(DEPTH), .XW(XW)) u_ctrl (
    .clk, .rst_n,
    .start      (conv_start),
    .mode       (cfg_mode),
    .dil        (cfg_dil),
    .img_h      (cfg_h),
    .img_w      (cfg_w),
    .busy       (c_busy),
    .done       (c_done),
    .cycles     (conv_cycles),
    .issue      (c_issue),
    .transposed (c_tr),
    .rd_en      (c_rd_en),
    .rd_addr    (c_rd_addr),
    .rmask      (c_rmask),
    .kcol       (c_kcol),
    .tile       (c_tile),
    .upd_en     (c_upd_en),
    .upd_addr   (c_upd_addr),
    .row_mask   (c_row_mask)
  );

  logic signed [DW-1:0] ib_rdata [2][LANES];

  input_buffer #(.DW(DW), .LANES(LANES), .DEPTH(DEPTH)) u_ibuf (
    .clk,
    .we    (ib_we),
    .waddr (ib_waddr),
    .wlane (ib_wlane),
    .wdata (ib_wdata),
    .re    (c_rd_en),
    .raddr (c_rd_addr),
    .rmask (c_rmask),
    .rdata (ib_rdata)
  );

  logic signed [DW-1:0] w_blk [NBLK][3];

  weight_router #(.DW(DW), .NBLK(NBLK)) u_wr (
    .clk, .rst_n,
    .w_we, .w_idx, .w_data,
    .transposed (c_tr),
    .kcol       (c_kcol),
    .w_blk      (w_blk)
  );

  // ---------------------------------------------------------------- pipeline control
  typedef struct packed {
    logic          issue;
    logic          tr;
    logic [TW-1:0] tile;
    logic          upd_en0;
    logic          upd_en1;
    logic [AW-1:0] upd_addr0;
    logic [AW-1:0] upd_addr1;
    logic [OUT_H-1:0] row_mask;
    logic          done;
  } stage_t;

  stage_t s0, s1, s2;

  always_comb begin
    s0.issue     = c_issue;
    s0.tr        = c_tr;
    s0.tile      = c_tile;
    s0.upd_en0   = c_upd_en[0];
    s0.upd_en1   = c_upd_en[1];
    s0.upd_addr0 = c_upd_addr[0];
    s0.upd_addr1 = c_upd_addr[1];
    s0.row_mask  = c_row_mask;
    s0.done      = c_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      conv_done <= 1'b0;
    end else begin
      s1 <= s0;
      s2 <= s1;
      conv_done <= s2.done;
    end
  end

  assign conv_busy = c_busy || s1.issue || s2.issue;

  // ---------------------------------------------------------------- PE blocks
  logic signed [DW-1:0] blk_x [NBLK][N];

  // Dense/dilated: block b takes lanes N*b..N*b+N-1 of the one column read.
  // Transposed: blocks 0 and 2 take rows of tile t from column j (port 0),
  // block 1 the same rows from column j+1 (port 1).
  always_comb begin
    for (int b = 0; b < int'(NBLK); b++) begin
      for (int i = 0; i < int'(N); i++) begin
        blk_x[b][i] = '0;
        if (!s1.tr) blk_x[b][i] = ib_rdata[0][N*b + i];
        else if (b < 3) blk_x[b][i] = ib_rdata[(b == 1) ? 1 : 0][(int'(N) * int'(s1.tile) + i) % int'(LANES)];
      end
    end
  end

  logic signed [PW-1:0] pl [NBLK][N];
  logic signed [PW-1:0] pm [NBLK][N];
  logic signed [PW-1:0] sp [NBLK];

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    logic blk_valid;
    pe_block #(.N(N), .DW(DW), .PW(PW)) u_pe (
      .clk, .rst_n,
      .en         (s1.issue),
      .transposed (s1.tr),
      .x          (blk_x[b]),
      .w          (w_blk[b]),
      .psum_last  (pl[b]),
      .psum_mid   (pm[b]),
      .spill1     (sp[b]),
      .valid      (blk_valid)
    );
    // every block result must line up with the delayed issue control
    a_in_step: assert property (@(posedge clk) disable iff (!rst_n) blk_valid == s2.issue)
      else $error("dtconv_top: PE block %0d out of step", b);
  end

  // ---------------------------------------------------------------- accumulate
  logic signed [ACC_W-1:0] upd_vec [2][OUT_H];

  psum_align #(.N(N), .NBLK(NBLK), .PW(PW), .ACC_W(ACC_W), .OUT_H(OUT_H)) u_align (
    .transposed (s2.tr),
    .tile       (s2.tile),
    .row_mask   (s2.row_mask),
    .psum_last  (pl),
    .psum_mid   (pm),
    .spill1     (sp),
    .vec0       (upd_vec[0]),
    .vec1       (upd_vec[1])
  );

  logic            acc_upd_en   [2];
  logic [AW-1:0]   acc_upd_addr [2];
  logic            acc_rd_en, acc_rd_valid;
  logic [AW-1:0]   acc_rd_addr;
  logic [OLW-1:0]  acc_rd_lane;
  logic signed [ACC_W-1:0] acc_rd_data;

  always_comb begin
    acc_upd_en[0]   = s2.issue && s2.upd_en0;
    acc_upd_en[1]   = s2.issue && s2.upd_en1;
    acc_upd_addr[0] = s2.upd_addr0;
    acc_upd_addr[1] = s2.upd_addr1;
  end

  accumulator #(.ACC_W(ACC_W), .OUT_H(OUT_H), .DEPTH(DEPTH)) u_acc (
    .clk, .rst_n,
    .clear    (acc_clear),
    .upd_en   (acc_upd_en),
    .upd_addr (acc_upd_addr),
    .upd_vec  (upd_vec),
    .rd_en    (acc_rd_en),
    .rd_addr  (acc_rd_addr),
    .rd_lane  (acc_rd_lane),
    .rd_valid (acc_rd_valid),
    .rd_data  (acc_rd_data)
  );

  // ---------------------------------------------------------------- read-out
  logic [XW-1:0] o_h, o_w;
  always_comb begin
    o_h = transposed_cfg ? XW'(2 * int'(cfg_h) - 1) : cfg_h;
    o_w = transposed_cfg ? XW'(2 * int'(cfg_w) - 1) : cfg_w;
  end

  output_stitcher #(.ACC_W(ACC_W), .MAX_W(MAX_W), .OUT_H(OUT_H), .DEPTH(DEPTH), .XW(XW)) u_stitch (
    .clk, .rst_n,
    .start     (out_start),
    .dil       (transposed_cfg ? '0 : cfg_dil),
    .out_h     (o_h),
    .out_w     (o_w),
    .busy      (out_busy),
    .rd_en     (acc_rd_en),
    .rd_addr   (acc_rd_addr),
    .rd_lane   (acc_rd_lane),
    .rd_valid  (acc_rd_valid),
    .rd_data   (acc_rd_data),
    .out_valid, .out_data, .out_last
  );

endmodule
