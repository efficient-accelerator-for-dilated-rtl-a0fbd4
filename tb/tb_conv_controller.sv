// tb_conv_controller -- runs the scheduler for dense, dilated and
// transposed configurations and compares every issued cycle with a
// schedule listed here from the decomposition rules:
//   dilated: for each column phase q (all row phases stacked in one
//   column vector), for each column c = q + j(D+1), weight columns a,b,c
//   (k = 0,1,2) except a on the last and c on the first column; read word
//   c, write word c + (1-k)(D+1); the lane/row mask holds exactly the
//   stacked position of every input row.
//   transposed: per row tile t and column j: read j and j+1, write 2j+1
//   (not for the last column) and 2j.
// Also checks the cycle counter and the done pulse.
module tb_conv_controller;
  import dtc_pkg::*;
  localparam int MAXW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, issue, transposed;
  mode_e mode;
  logic [7:0] dil, img_h, img_w;
  logic [31:0] cycles;
  logic rd_en [2];
  logic [5:0] rd_addr [2];
  logic [55:0] rmask;
  logic [1:0] kcol;
  logic [2:0] tile;
  logic upd_en [2];
  logic [5:0] upd_addr [2];
  logic [111:0] row_mask;

  conv_controller dut (.*);

  int checks = 0, failures = 0;

  typedef struct {
    int rd0, rd1; bit rd1_en; int k; int tile; logic [55:0] lanes; int up0; bit up0_en; int up1; bit up1_en; logic [111:0] rows;
  } iss_t;
  iss_t exp_q [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stacked position of row r: rows of earlier phases, one zero lane after
  // each earlier phase, then r div (D+1)
  function automatic int exp_lane(input int d, input int h, input int r);
    int n = 0;
    for (int rr = 0; rr < h; rr++)
      if (rr % (d+1) < r % (d+1)) n++;
    for (int pp = 0; pp < r % (d+1); pp++) n++;
    return n + r / (d+1);
  endfunction

  task automatic build(input bit tr, input int d, input int h, input int w);
    iss_t e;
    exp_q.delete();
    if (!tr) begin
      logic [111:0] m;
      m = '0;
      for (int r = 0; r < h; r++) m[exp_lane(d, h, r)] = 1'b1;
      for (int q = 0; q <= d && q < w; q++)
        for (int c = q; c < w; c += d + 1)
          for (int k = 0; k < 3; k++) begin
            if (k == 0 && c + d + 1 >= w) continue;
            if (k == 2 && c == q) continue;
            e.rd0 = c; e.rd1 = 0; e.rd1_en = 0; e.k = k; e.tile = 0; e.lanes = m[55:0];
            e.up0 = c + (1-k)*(d+1); e.up0_en = 1; e.up1 = 0; e.up1_en = 0; e.rows = m;
            exp_q.push_back(e);
          end
    end else begin
      for (int t = 0; t * 14 < h; t++)
        for (int j = 0; j < w; j++) begin
          e.rd0 = j; e.rd1 = j + 1; e.rd1_en = (j + 1 < w); e.k = -1; e.tile = t;
          for (int l = 0; l < 56; l++) e.lanes[l] = (l < h);
          e.up0 = 2*j + 1; e.up0_en = (j + 1 < w); e.up1 = 2*j; e.up1_en = 1;
          for (int l = 0; l < 112; l++) e.rows[l] = (l < 2*h - 1);
          exp_q.push_back(e);
        end
    end
  endtask

  task automatic run(input bit tr, input int d, input int h, input int w);
    int n, idx;
    bit got_done;
    build(tr, d, h, w);
    n = exp_q.size();
    @(negedge clk);
    mode = tr ? MODE_TRANSPOSED : MODE_DILATED; dil = 8'(d); img_h = 8'(h); img_w = 8'(w); start = 1;
    @(negedge clk); start = 0;
    idx = 0; got_done = 0;
    while (busy && idx < n + 5) begin
      iss_t e;
      e = exp_q[idx % n];
      checks++;
      if (!(issue && rd_en[0] && int'(rd_addr[0]) == e.rd0 && rd_en[1] == e.rd1_en &&
            (!e.rd1_en || int'(rd_addr[1]) == e.rd1) && (e.k < 0 || int'(kcol) == e.k) &&
            int'(tile) == e.tile && rmask == e.lanes && upd_en[0] == e.up0_en &&
            (!e.up0_en || int'(upd_addr[0]) == e.up0) && upd_en[1] == e.up1_en &&
            (!e.up1_en || int'(upd_addr[1]) == e.up1) && row_mask == e.rows &&
            transposed == tr)) begin
        failures++;
        if (failures < 10) $display("tr%0d D%0d %0dx%0d issue %0d: rd %0d k %0d up %0d (exp rd %0d k %0d up %0d)",
                                    tr, d, h, w, idx, rd_addr[0], kcol, upd_addr[0], e.rd0, e.k, e.up0);
      end
      idx++;
      @(posedge clk); #1;
      if (done) got_done = 1;
      @(negedge clk);
    end
    checks += 3;
    if (idx != n) begin failures++; $display("tr%0d D%0d %0dx%0d: %0d issues, expected %0d", tr, d, h, w, idx, n); end
    if (int'(cycles) != n) begin failures++; $display("cycle counter %0d expected %0d", cycles, n); end
    if (!got_done) begin failures++; $display("no done pulse"); end
  endtask

  initial begin
    start = 0; mode = MODE_DILATED; dil = 0; img_h = 1; img_w = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 0, 10, 6);
    run(0, 0, 4, 1);
    run(0, 0, 4, 2);
    run(0, 1, 7, 7);
    run(0, 2, 7, 7);
    run(0, 3, 53, 32);
    run(0, 15, 41, 32);
    run(0, 7, 3, 9);
    run(0, 15, 10, 5);
    run(1, 0, 3, 3);
    run(1, 0, 30, 10);
    run(1, 0, 56, 32);
    run(1, 0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
