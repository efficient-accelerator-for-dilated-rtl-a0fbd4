// tb_dtconv_top -- end-to-end test of the convolution engine at its default
// sizes (4 PE blocks of 14 x 3 MACs, 56-row by 32-column input tile).
//
// For every case the test loads a random 3x3 kernel and a random input map,
// runs the engine, streams the output map back and compares every element
// with a direct software convolution:
//   dilated, D inserted zeros:  out[r][c] = sum W[u][v] x[r+(D+1)(u-1)][c+(D+1)(v-1)]
//   transposed (stride 2):      out[r][c] = sum W[u][v] z[r+u][c+v], where z is x
//                               with one zero between and around elements
//                               (z[2i+1][2j+1] = x[i][j]); output (2H-1) x (2W-1).
// It also checks the cycle count of every run against the schedule:
//   dilated: sum over the D+1 column phases of (3*SW-2), or 1 if SW = 1
//            (the row phases share one stacked column vector)
//   transposed: ceil(H/14) * W
// and counts that each mechanism happened: dense runs, dilated runs,
// transposed runs, skipped boundary weight vectors, idle blocks in
// transposed mode, multi-row-tile transposed runs, accumulation of two
// runs without clearing and dilated runs with stacked row phases.
module tb_dtconv_top;
  import dtc_pkg::*;

  localparam int N = 14, LANES = 56, MAXW = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e cfg_mode;
  logic [7:0] cfg_dil, cfg_h, cfg_w;
  logic w_we; logic [3:0] w_idx; logic signed [15:0] w_data;
  logic in_start, in_valid; logic signed [15:0] in_data;
  logic in_busy, in_done;
  logic acc_clear, conv_start, conv_busy, conv_done;
  logic [31:0] conv_cycles;
  logic out_start, out_busy, out_valid, out_last;
  logic signed [39:0] out_data;

  dtconv_top dut (.*);

  int checks = 0, failures = 0;
  int n_dense = 0, n_dilated = 0, n_transposed = 0, n_skip = 0, n_idle = 0, n_tiles = 0, n_accum = 0, n_stacked = 0;

  int kern [3][3];
  int img  [LANES][MAXW];
  longint exp_out [2*LANES][2*MAXW];

  // mechanism monitors
  always @(posedge clk) begin
    if (dut.u_ctrl.issue && !dut.u_ctrl.transposed && dut.u_ctrl.k_end &&
        (dut.u_ctrl.first || dut.u_ctrl.last_col) && !(dut.u_ctrl.first && dut.u_ctrl.last_col))
      n_skip++;
    if (dut.u_ctrl.issue && dut.u_ctrl.transposed && !dut.u_ctrl.upd_en[0]) n_idle++;
    if (dut.u_ctrl.issue && dut.u_ctrl.transposed && dut.u_ctrl.tile != 0 && dut.u_ctrl.j == 0) n_tiles++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic load_kernel();
    for (int u = 0; u < 3; u++)
      for (int v = 0; v < 3; v++) begin
        kern[u][v] = $signed(16'($urandom));
        @(negedge clk); w_we = 1; w_idx = 4'(u*3+v); w_data = 16'(kern[u][v]);
      end
    @(negedge clk); w_we = 0;
  endtask

  task automatic load_image(input int h, input int w);
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) img[r][c] = $signed(16'($urandom));
    @(negedge clk); in_start = 1;
    @(negedge clk); in_start = 0;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        in_valid = 1; in_data = 16'(img[r][c]);
        @(negedge clk);
      end
    in_valid = 0;
    check(!in_busy, "loader finished");
  endtask

  // adds the reference result of the current image into exp_out
  task automatic reference(input bit tr, input int d, input int h, input int w);
    if (!tr) begin
      for (int r = 0; r < h; r++)
        for (int c = 0; c < w; c++)
          for (int u = 0; u < 3; u++)
            for (int v = 0; v < 3; v++) begin
              int rr, cc;
              rr = r + (d+1)*(u-1); cc = c + (d+1)*(v-1);
              if (rr >= 0 && rr < h && cc >= 0 && cc < w)
                exp_out[r][c] += longint'(kern[u][v]) * longint'(img[rr][cc]);
            end
    end else begin
      for (int r = 0; r < 2*h-1; r++)
        for (int c = 0; c < 2*w-1; c++)
          for (int u = 0; u < 3; u++)
            for (int v = 0; v < 3; v++) begin
              int zr, zc;
              zr = r + u; zc = c + v;
              if (zr % 2 == 1 && zc % 2 == 1)
                exp_out[r][c] += longint'(kern[u][v]) * longint'(img[zr/2][zc/2]);
            end
    end
  endtask

  function automatic int expected_cycles(input bit tr, input int d, input int h, input int w);
    int total = 0;
    if (tr) return ((h + N - 1) / N) * w;
    // row phases are stacked in one column vector: only column phases cost
    for (int q = 0; q <= d && q < w; q++) begin
      int sw = (w - q + d) / (d + 1);
      total += (sw == 1) ? 1 : 3*sw - 2;
    end
    return total;
  endfunction

  task automatic run_case(input bit tr, input int d, input int h, input int w, input bit clear);
    int oh, ow, t0, got_cycles, cnt;
    bit seen_last;
    string tag;
    tag = $sformatf("%s D=%0d %0dx%0d", tr ? "transposed" : "dilated", d, h, w);
    cfg_mode = tr ? MODE_TRANSPOSED : MODE_DILATED;
    cfg_dil = 8'(d); cfg_h = 8'(h); cfg_w = 8'(w);
    load_kernel();
    load_image(h, w);
    if (clear) begin
      for (int r = 0; r < 2*LANES; r++)
        for (int c = 0; c < 2*MAXW; c++) exp_out[r][c] = 0;
      @(negedge clk); acc_clear = 1;
      @(negedge clk); acc_clear = 0;
    end else n_accum++;
    reference(tr, d, h, w);
    @(negedge clk); conv_start = 1;
    @(negedge clk); conv_start = 0;
    wait (conv_done);
    @(negedge clk);
    got_cycles = int'(conv_cycles);
    check(got_cycles == expected_cycles(tr, d, h, w),
          $sformatf("%s cycles %0d expected %0d", tag, got_cycles, expected_cycles(tr, d, h, w)));
    check(!conv_busy, "engine idle after done");
    oh = tr ? 2*h-1 : h;
    ow = tr ? 2*w-1 : w;
    out_start = 1;
    @(negedge clk); out_start = 0;
    cnt = 0; seen_last = 0;
    while (cnt < oh*ow) begin
      if (out_valid) begin
        int r, c;
        r = cnt / ow; c = cnt % ow;
        check(longint'(out_data) == exp_out[r][c],
              $sformatf("%s out[%0d][%0d]=%0d expected %0d", tag, r, c, out_data, exp_out[r][c]));
        if (out_last) seen_last = (cnt == oh*ow-1);
        cnt++;
      end
      @(negedge clk);
    end
    check(seen_last, {tag, " out_last on final element"});
    if (tr) n_transposed++;
    else if (d == 0) n_dense++;
    else n_dilated++;
    // several row phases shared one column vector in this run
    if (!tr && d > 0 && h > 1) n_stacked++;
    $display("case %s: %0d cycles", tag, got_cycles);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_mode = MODE_DILATED; cfg_dil = 0; cfg_h = 1; cfg_w = 1;
    w_we = 0; w_idx = 0; w_data = 0; in_start = 0; in_valid = 0; in_data = 0;
    acc_clear = 0; conv_start = 0; out_start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // paper-sized examples: 7x7 dilated D=1 and D=2, 3x3 transposed (3 cycles)
    run_case(0, 1, 7, 7, 1);
    run_case(0, 2, 7, 7, 1);
    run_case(1, 0, 3, 3, 1);
    check(int'(conv_cycles) == 3, "3x3 transposed example takes three cycles");
    // dense, including a one-column map and accumulation of two runs
    run_case(0, 0, 20, 9, 1);
    run_case(0, 0, 20, 9, 0);
    run_case(0, 0, 5, 1, 1);
    // dilation rates of the ENet translation stage on a full tile
    run_case(0, 3, 53, 32, 1);
    run_case(0, 15, 41, 32, 1);
    run_case(0, 7, 40, 20, 1);
    // transposed on several row tiles, full tile
    run_case(1, 0, 30, 10, 1);
    run_case(1, 0, 56, 32, 1);
    // a full-tile dense layer
    run_case(0, 0, 56, 32, 1);
    $display("mechanisms: dense=%0d dilated=%0d transposed=%0d boundary_skips=%0d idle_block_cycles=%0d row_tiles=%0d accumulate=%0d stacked_phases=%0d",
             n_dense, n_dilated, n_transposed, n_skip, n_idle, n_tiles, n_accum, n_stacked);
    check(n_dense > 0, "dense run happened");
    check(n_dilated > 0, "dilated run happened");
    check(n_transposed > 0, "transposed run happened");
    check(n_skip > 0, "boundary weight vector skipped");
    check(n_idle > 0, "transposed idle blocks happened");
    check(n_tiles > 0, "transposed row tiling happened");
    check(n_accum > 0, "accumulation without clear happened");
    check(n_stacked > 0, "stacked row phases happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
