// tb_output_stitcher -- connects the reader to a model of the accumulator
// read port (one-cycle latency, each word/lane holding a value that encodes
// its own address). The raster stream must return, for output (r,c), the
// value stored at word c, lane = stacked-phase position of row r (rows of
// earlier phases plus one zero lane per earlier phase, plus r div (D+1)),
// one element per cycle, with out_last on the final element only.
module tb_output_stitcher;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, rd_en, rd_valid, out_valid, out_last;
  logic [7:0] dil, out_h, out_w;
  logic [5:0] rd_addr;
  logic [6:0] rd_lane;
  logic signed [39:0] rd_data, out_data;

  output_stitcher dut (.*);

  // accumulator read-port model
  always_ff @(posedge clk) begin
    rd_valid <= rd_en;
    rd_data  <= 40'(int'(rd_addr) * 1000 + int'(rd_lane));
  end

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
    int cnt, waitc;
    @(negedge clk);
    dil = 8'(d); out_h = 8'(h); out_w = 8'(w); start = 1;
    @(negedge clk); start = 0;
    cnt = 0; waitc = 0;
    while (cnt < h*w && waitc < 3) begin
      if (out_valid) begin
        int r, c;
        longint e;
        r = cnt / w; c = cnt % w;
        e = c * 1000 + exp_lane(d, h, r);
        checks += 2;
        if (longint'(out_data) != e) begin failures++; if (failures < 10) $display("D%0d (%0d,%0d) %0d != %0d", d, r, c, out_data, e); end
        if (out_last != (cnt == h*w-1)) begin failures++; $display("out_last wrong at %0d", cnt); end
        cnt++;
        waitc = 0;
      end else waitc++;
      @(negedge clk);
    end
    checks += 2;
    if (cnt != h*w) begin failures++; $display("got %0d of %0d", cnt, h*w); end
    if (busy || out_valid) begin failures++; $display("still busy"); end
  endtask

  initial begin
    start = 0; dil = 0; out_h = 1; out_w = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 5, 7);
    run(1, 7, 7);
    run(2, 7, 7);
    run(15, 41, 32);
    run(3, 53, 20);
    run(7, 16, 5);
    run(0, 111, 63);
    run(0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
