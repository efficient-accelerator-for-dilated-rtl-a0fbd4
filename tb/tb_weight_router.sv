// tb_weight_router -- loads random kernels and checks the weights each PE
// block receives one cycle after selection: the chosen kernel column in
// normal mode, and in transposed mode the three decomposed groups
// (wa1,wa3,wa2), (wc1,wc3,wc2), (wb1,wb3,wb2) on blocks 0, 1, 2 with zeros
// on block 3.
module tb_weight_router;
  localparam int NBLK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, transposed;
  logic [3:0] w_idx;
  logic signed [15:0] w_data;
  logic [1:0] kcol;
  logic signed [15:0] w_blk [NBLK][3];

  weight_router dut (.*);

  int checks = 0, failures = 0;
  int K [3][3];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; w_idx = 0; w_data = 0; transposed = 0; kcol = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int u = 0; u < 3; u++)
        for (int v = 0; v < 3; v++) begin
          K[u][v] = $signed(16'($urandom));
          @(negedge clk); w_we = 1; w_idx = 4'(u*3+v); w_data = 16'(K[u][v]);
        end
      @(negedge clk); w_we = 0;
      for (int s = 0; s < 4; s++) begin
        int e [NBLK][3];
        transposed = (s == 3);
        kcol = 2'(s % 3);
        for (int b = 0; b < NBLK; b++)
          for (int k = 0; k < 3; k++) e[b][k] = 0;
        if (!transposed) begin
          for (int b = 0; b < NBLK; b++)
            for (int u = 0; u < 3; u++) e[b][u] = K[u][kcol];
        end else begin
          e[0][0] = K[0][0]; e[0][1] = K[2][0]; e[0][2] = K[1][0];
          e[1][0] = K[0][2]; e[1][1] = K[2][2]; e[1][2] = K[1][2];
          e[2][0] = K[0][1]; e[2][1] = K[2][1]; e[2][2] = K[1][1];
        end
        @(negedge clk);
        for (int b = 0; b < NBLK; b++)
          for (int k = 0; k < 3; k++) begin
            checks++;
            if (int'(w_blk[b][k]) != e[b][k]) begin failures++; $display("rep%0d s%0d blk%0d w%0d %0d != %0d", rep, s, b, k, w_blk[b][k], e[b][k]); end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
