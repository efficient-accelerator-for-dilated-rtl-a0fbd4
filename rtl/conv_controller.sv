// conv_controller -- schedules column vectors and weight column vectors
// onto the PE blocks.
//
// Dilated mode (dense is D = 0). The input has been split into (D+1)^2
// blocks; all row phases of a column sit stacked in one column vector (see
// input_decomposer), so the blocks of one column phase q are convolved
// together. For each column phase q the controller walks the columns
// c = q, q+(D+1), ... and sends each input column vector once per useful
// weight column vector k (a, b, c = 0, 1, 2). Weight column k applied to
// input column c produces output column c + (1-k)(D+1). At the edges the
// vector that would only meet zero padding is skipped: the first column
// gets two weight vectors (a, b), the last column two (b, c), a single
// column only b. A column phase of SW columns takes 3*SW-2 cycles (1 if
// SW = 1); the layer takes the sum over the min(D+1, W) column phases.
// The lane mask marks the data lanes: it excludes the zero lane after each
// row phase and everything past the last phase.
//
// Transposed mode (stride 2, D = 0). Rows are taken N at a time (tile t);
// for each input column j one cycle is spent: port 0 reads column j
// (blocks 0 and 2), port 1 reads column j+1 (block 1). Blocks 0+1 produce
// output column 2j+1, block 2 output column 2j. For the last input column
// blocks 0 and 1 idle, as there is no column 2W-1. A layer takes
// ceil(H/N)*W cycles and yields a (2H-1) x (2W-1) output.
//
// The stacking of row phases, the boundary skipping and the transposed
// column pairing follow the published scheme; loop order, the zero lane
// between phases, addressing and the cycle-level interface are this
// design's choices.
//
// Interface: pulse 'start' with the configuration stable; the issue
// outputs are combinational functions of the registered loop state and are
// valid whenever 'issue' is high, one issue per cycle, no stalls.
// 'done' pulses in the cycle of the last issue; 'cycles' counts issues.
module conv_controller #(
  parameter int unsigned N     = dtc_pkg::N_DEF,
  parameter int unsigned NBLK  = dtc_pkg::NBLK_DEF,
  parameter int unsigned MAX_W = dtc_pkg::MAX_W_DEF,
  parameter int unsigned DMAX  = dtc_pkg::DMAX_DEF,
  parameter int unsigned LANES = N * NBLK,
  parameter int unsigned OUT_H = 2 * LANES,
  parameter int unsigned DEPTH = 2 * MAX_W,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned LW    = $clog2(LANES + 1),
  parameter int unsigned TW    = $clog2(NBLK + 1),
  parameter int unsigned XW    = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  dtc_pkg::mode_e      mode,
  input  logic [XW-1:0]       dil,
  input  logic [XW-1:0]       img_h,
  input  logic [XW-1:0]       img_w,
  output logic                busy,
  output logic                done,
  output logic [31:0]         cycles,
  // issue
  output logic                issue,
  output logic                transposed,
  output logic                rd_en   [2],
  output logic [AW-1:0]       rd_addr [2],
  output logic [LANES-1:0]    rmask,
  output logic [1:0]          kcol,
  output logic [TW-1:0]       tile,
  output logic                upd_en   [2],
  output logic [AW-1:0]       upd_addr [2],
  output logic [OUT_H-1:0]    row_mask
);

  import dtc_pkg::*;

  mode_e         mode_q;
  logic [XW-1:0] d_q, h_q, w_q;
  logic [XW-1:0] q, c, j, t;
  logic [OUT_H-1:0] mask_q;
  logic [1:0]    k;
  logic          first;

  int step, ocol, ntile;
  logic last_col, k_end;

  // Data lanes of a column vector (dilated) or valid output rows
  // (transposed). Dilated: row phase p occupies lanes
  // phase_offset(p) .. phase_offset(p+1)-2; the lane after it stays zero.
  function automatic logic [OUT_H-1:0] lane_mask(input mode_e m, input int d, input int h);
    logic [OUT_H-1:0] v;
    int hq, hr, nph, off, len;
    v = '0;
    if (m == MODE_TRANSPOSED) begin
      for (int r = 0; r < int'(OUT_H); r++) v[r] = (r < 2 * h - 1);
    end else begin
      hq  = h / (d + 1);
      hr  = h % (d + 1);
      nph = (d + 1 < h) ? d + 1 : h;
      for (int ph = 0; ph <= int'(DMAX); ph++) begin
        if (ph < nph) begin
          off = int'(phase_offset(ph, hq, hr));
          len = hq + ((ph < hr) ? 1 : 0);
          for (int l = 0; l < int'(LANES); l++)
            if (l >= off && l < off + len) v[l] = 1'b1;
        end
      end
    end
    return v;
  endfunction

  always_comb begin
    step     = int'(d_q) + 1;
    last_col = (int'(c) + step >= int'(w_q));
    k_end    = first ? (k == 2'd1) : (k == 2'd2);
    ntile    = (int'(h_q) + int'(N) - 1) / int'(N);
    ocol     = int'(c) + (1 - int'(k)) * step;

    issue      = busy;
    transposed = (mode_q == MODE_TRANSPOSED);
    kcol       = k;
    tile       = TW'(t);
    if (mode_q == MODE_DILATED) begin
      rd_en[0]    = busy;
      rd_addr[0]  = AW'(c);
      rd_en[1]    = 1'b0;
      rd_addr[1]  = '0;
      rmask       = mask_q[LANES-1:0];
      upd_en[0]   = busy;
      upd_addr[0] = AW'(ocol);
      upd_en[1]   = 1'b0;
      upd_addr[1] = '0;
      row_mask    = mask_q;
    end else begin
      rd_en[0]    = busy;
      rd_addr[0]  = AW'(j);
      rd_en[1]    = busy && (int'(j) + 1 < int'(w_q));
      rd_addr[1]  = AW'(int'(j) + 1);
      for (int l = 0; l < int'(LANES); l++) rmask[l] = (l < int'(h_q));
      upd_en[0]   = busy && (int'(j) + 1 < int'(w_q));
      upd_addr[0] = AW'(2 * int'(j) + 1);
      upd_en[1]   = busy;
      upd_addr[1] = AW'(2 * int'(j));
      row_mask    = mask_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cycles <= '0;
      mode_q <= MODE_DILATED; d_q <= '0; h_q <= '0; w_q <= '0;
      q <= '0; c <= '0; j <= '0; t <= '0; k <= '0; first <= 1'b1; mask_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        cycles <= '0;
        mode_q <= mode;
        d_q    <= (mode == MODE_TRANSPOSED) ? '0 : dil;
        h_q    <= img_h;
        w_q    <= img_w;
        q <= '0; c <= '0; j <= '0; t <= '0; first <= 1'b1;
        mask_q <= lane_mask(mode, int'(dil), int'(img_h));
        // first column of block (0,0): skip weight vector a if it is also the last
        k <= ((mode == MODE_TRANSPOSED) || (int'(dil) + 1 >= int'(img_w))) ? 2'd1 : 2'd0;
      end else if (busy) begin
        cycles <= cycles + 1;
        if (mode_q == MODE_DILATED) begin
          if (!k_end) begin
            k <= k + 2'd1;
          end else if (!last_col) begin
            c     <= c + XW'(step);
            first <= 1'b0;
            k     <= (int'(c) + 2 * step >= int'(w_q)) ? 2'd1 : 2'd0;
          end else begin
            // next column phase
            first <= 1'b1;
            if (int'(q) + 1 <= int'(d_q) && int'(q) + 1 < int'(w_q)) begin
              q <= q + 1'b1;
              c <= q + 1'b1;
              k <= (int'(q) + 1 + step >= int'(w_q)) ? 2'd1 : 2'd0;
            end else begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end else begin
          if (int'(j) + 1 < int'(w_q)) begin
            j <= j + 1'b1;
          end else begin
            j <= '0;
            if (int'(t) + 1 < ntile) t <= t + 1'b1;
            else begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end
      end
    end
  end

  // Configuration rules: the decomposed blocks must fit the buffers.
  always_ff @(posedge clk) begin
    if (start && !busy) begin
      assert (mode == MODE_TRANSPOSED || int'(dil) <= int'(DMAX))
        else $error("conv_controller: D=%0d exceeds DMAX=%0d", dil, DMAX);
      assert (int'(img_w) <= int'(MAX_W) && int'(img_h) <= int'(LANES) && img_h != 0 && img_w != 0)
        else $error("conv_controller: map %0dx%0d does not fit", img_h, img_w);
      assert (mode == MODE_TRANSPOSED ||
              int'(img_h) + ((int'(dil) + 1 < int'(img_h)) ? int'(dil) : int'(img_h) - 1) <= int'(LANES))
        else $error("conv_controller: %0d rows with D=%0d need more than %0d lanes", img_h, dil, LANES);
      assert (mode != MODE_TRANSPOSED || NBLK >= 3)
        else $error("conv_controller: transposed mode needs three PE blocks");
    end
  end

endmodule
