// tb_pe_block -- checks one n x 3 MAC block against the diagonal-sum
// equations, in both modes, with random 16-bit operands:
//   normal:     psum_last[i] = x[i-2]w0 + x[i-1]w1 + x[i]w2
//   transposed: psum_last[i] = x[i]w2
//   both:       psum_mid[i] = x[i-1]w0 + x[i]w1, spill1 = x[N-1]w0
// and that results appear exactly one cycle after the operands.
module tb_pe_block;
  localparam int N = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, transposed, valid;
  logic signed [15:0] x [N];
  logic signed [15:0] w [3];
  logic signed [33:0] psum_last [N];
  logic signed [33:0] psum_mid [N];
  logic signed [33:0] spill1;

  pe_block #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  function automatic longint xv(input int i);
    return (i < 0) ? 0 : longint'(x[i]);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; transposed = 0;
    foreach (x[i]) x[i] = 0;
    foreach (w[k]) w[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint e_last [N];
      longint e_mid [N];
      longint e_sp;
      @(negedge clk);
      transposed = t[0];
      en = 1;
      foreach (x[i]) x[i] = $signed(16'($urandom));
      foreach (w[k]) w[k] = $signed(16'($urandom));
      if (t % 17 == 0) begin x[0] = -32768; w[0] = -32768; w[1] = -32768; w[2] = -32768; end
      for (int i = 0; i < N; i++) begin
        e_mid[i]  = xv(i-1) * w[0] + xv(i) * w[1];
        e_last[i] = transposed ? xv(i) * w[2] : xv(i-2) * w[0] + xv(i-1) * w[1] + xv(i) * w[2];
      end
      e_sp = xv(N-1) * w[0];
      @(posedge clk); #1;
      checks++;
      if (!valid) begin failures++; $display("valid missing at %0d", t); end
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (longint'(psum_last[i]) != e_last[i]) begin failures++; $display("t%0d last[%0d] %0d != %0d", t, i, psum_last[i], e_last[i]); end
        if (longint'(psum_mid[i]) != e_mid[i]) begin failures++; $display("t%0d mid[%0d] %0d != %0d", t, i, psum_mid[i], e_mid[i]); end
      end
      checks++;
      if (longint'(spill1) != e_sp) begin failures++; $display("t%0d spill %0d != %0d", t, spill1, e_sp); end
    end
    @(negedge clk); en = 0;
    @(posedge clk); #1;
    checks++;
    if (valid) begin failures++; $display("valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
