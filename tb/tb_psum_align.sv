// tb_psum_align -- drives random partial sums into the aligner and checks
// both output vectors against an independent placement: a scatter over
// every (block, row) contribution, computed here with plain arrays, keeping
// only rows enabled in the row mask.
module tb_psum_align;
  localparam int N = 14, NBLK = 4, OUT_H = 2*N*NBLK;
  logic transposed;
  logic [2:0] tile;
  logic [OUT_H-1:0] row_mask;
  logic signed [33:0] psum_last [NBLK][N];
  logic signed [33:0] psum_mid  [NBLK][N];
  logic signed [33:0] spill1    [NBLK];
  logic signed [39:0] vec0 [OUT_H];
  logic signed [39:0] vec1 [OUT_H];

  psum_align #(.N(N), .NBLK(NBLK)) dut (.*);

  int checks = 0, failures = 0;
  longint e0 [OUT_H];
  longint e1 [OUT_H];

  task automatic add(input int which, input int r, input longint v);
    if (r < 0 || r >= OUT_H || !row_mask[r]) return;
    if (which == 0) e0[r] += v; else e1[r] += v;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      transposed = t[0];
      tile = transposed ? 3'($urandom_range(0, NBLK-1)) : 3'($urandom_range(0, NBLK-1));
      // random masks with holes (like the zero lanes between stacked row
      // phases), and every fifth vector a full mask
      row_mask = {$urandom, $urandom, $urandom, $urandom};
      if (t % 5 == 0) row_mask = '1;
      for (int b = 0; b < NBLK; b++) begin
        for (int i = 0; i < N; i++) begin
          psum_last[b][i] = 34'($signed(32'($urandom)));
          psum_mid[b][i]  = 34'($signed(32'($urandom)));
        end
        spill1[b] = 34'($signed(32'($urandom)));
      end
      foreach (e0[r]) begin e0[r] = 0; e1[r] = 0; end
      for (int b = 0; b < NBLK; b++) begin
        if (!transposed) begin
          // rows of block b start at N*b; diagonal i ends on row N*b+i-1
          for (int i = 0; i < N; i++) add(0, N*b + i - 1, psum_last[b][i]);
          add(0, N*b + N - 1, psum_mid[b][N-1]);
          add(0, N*b + N, spill1[b]);
        end else if (b < 3) begin
          int o;
          o = 2*N*int'(tile);
          for (int i = 0; i < N; i++) begin
            add(b == 2, o + 2*i, psum_last[b][i]);
            add(b == 2, o + 2*i - 1, psum_mid[b][i]);
          end
          add(b == 2, o + 2*N - 1, spill1[b]);
        end
      end
      #1;
      for (int r = 0; r < OUT_H; r++) begin
        checks += 2;
        if (longint'(vec0[r]) != e0[r]) begin failures++; if (failures < 10) $display("t%0d vec0[%0d] %0d != %0d", t, r, vec0[r], e0[r]); end
        if (longint'(vec1[r]) != e1[r]) begin failures++; if (failures < 10) $display("t%0d vec1[%0d] %0d != %0d", t, r, vec1[r], e1[r]); end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
