// tb_input_decomposer -- streams raster maps with several D into the
// decomposer and records every write. Each element (r,c) must be written
// once, to word c with the row phases stacked in the lanes (rows of phase
// r mod (D+1) follow all earlier phases, each earlier phase followed by one
// zero lane), with its own value; 'done' must pulse with the last element.
module tb_input_decomposer;
  localparam int MAXW = 32, LANES = 56;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, busy, done, we;
  logic [7:0] dil, img_h, img_w;
  logic signed [15:0] in_data, wdata;
  logic [5:0] waddr;
  logic [5:0] wlane;

  input_decomposer dut (.*);

  int checks = 0, failures = 0;

  // lane of row r with the row phases stacked: all rows of earlier phases,
  // plus one zero lane after each earlier phase, plus r div (D+1)
  function automatic int exp_lane(input int d, input int h, input int r);
    int n = 0;
    for (int rr = 0; rr < h; rr++)
      if (rr % (d+1) < r % (d+1)) n++;
    for (int pp = 0; pp < r % (d+1); pp++) n++;
    return n + r / (d+1);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int d, input int h, input int w);
    int cnt;
    @(negedge clk);
    dil = 8'(d); img_h = 8'(h); img_w = 8'(w); start = 1;
    @(negedge clk); start = 0;
    cnt = 0;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_data = 16'(r * 100 + c);
        #1;
        if (in_valid) begin
          checks += 4;
          if (!we) begin failures++; $display("no write for (%0d,%0d)", r, c); end
          if (int'(waddr) != c) begin failures++; $display("D=%0d (%0d,%0d) addr %0d", d, r, c, waddr); end
          if (int'(wlane) != exp_lane(d, h, r)) begin failures++; $display("D=%0d (%0d,%0d) lane %0d", d, r, c, wlane); end
          if (wdata != 16'(r * 100 + c)) begin failures++; end
          @(negedge clk);
          if (r == h-1 && c == w-1) begin
            checks++;
            if (!done || busy) begin failures++; $display("done missing"); end
          end
        end else begin
          checks++;
          if (we) begin failures++; $display("write without valid"); end
          @(negedge clk);
          c--;
          if (c < -1) begin r--; c = w - 1; end
        end
      end
    in_valid = 0;
  endtask

  initial begin
    start = 0; in_valid = 0; in_data = 0; dil = 0; img_h = 1; img_w = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 5, 4);
    run(1, 7, 7);
    run(2, 7, 7);
    run(15, 41, 32);
    run(3, 53, 20);
    run(7, 16, 5);
    run(3, 20, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
