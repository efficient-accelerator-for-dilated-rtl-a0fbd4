// tb_input_buffer -- fills the buffer element by element with known values,
// then reads whole words on both ports. Checks the one-cycle read latency,
// zeroing of lanes outside the lane mask and zero data from a disabled port.
module tb_input_buffer;
  localparam int LANES = 56, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [5:0] waddr;
  logic [5:0] wlane;
  logic [LANES-1:0] rmask;
  logic signed [15:0] wdata;
  logic re [2];
  logic [5:0] raddr [2];
  logic signed [15:0] rdata [2][LANES];

  input_buffer dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [15:0] val(input int a, input int l);
    return 16'(a * 37 + l * 1001 + 5);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re[0] = 0; re[1] = 0; raddr[0] = 0; raddr[1] = 0; rmask = '0; waddr = 0; wlane = 0; wdata = 0;
    for (int a = 0; a < 64; a++)
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk); we = 1; waddr = 6'(a); wlane = 6'(l); wdata = val(a, l);
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      int a0, a1;
      logic [LANES-1:0] m;
      bit e1;
      a0 = $urandom_range(0, 63); a1 = $urandom_range(0, 63);
      m = LANES'({$urandom, $urandom});
      if (t % 7 == 0) m = '1;
      e1 = $urandom_range(0, 1);
      @(negedge clk);
      re[0] = 1; re[1] = e1; raddr[0] = 6'(a0); raddr[1] = 6'(a1); rmask = m;
      @(negedge clk);
      re[0] = 0; re[1] = 0;
      for (int l = 0; l < LANES; l++) begin
        checks += 2;
        if (rdata[0][l] != (m[l] ? val(a0, l) : 16'(0))) begin failures++; if (failures < 10) $display("p0 a%0d l%0d", a0, l); end
        if (rdata[1][l] != ((m[l] && e1) ? val(a1, l) : 16'(0))) begin failures++; if (failures < 10) $display("p1 a%0d l%0d", a1, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
