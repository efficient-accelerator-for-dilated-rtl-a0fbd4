// tb_accumulator -- random column-vector updates on both ports (including
// both ports on the same word) into a scoreboard, then reads back every
// accumulator through the read port; also checks that 'clear' zeroes all.
// A small depth keeps the read-back short.
module tb_accumulator;
  localparam int OUT_H = 112, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, rd_en, rd_valid;
  logic upd_en [2];
  logic [3:0] upd_addr [2];
  logic signed [39:0] upd_vec [2][OUT_H];
  logic [3:0] rd_addr;
  logic [6:0] rd_lane;
  logic signed [39:0] rd_data;

  accumulator #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint sb [DEPTH][OUT_H];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readback(input string tag);
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < OUT_H; l++) begin
        @(negedge clk); rd_en = 1; rd_addr = 4'(a); rd_lane = 7'(l);
        @(negedge clk); rd_en = 0;
        checks++;
        if (!rd_valid || longint'(rd_data) != sb[a][l]) begin
          failures++;
          if (failures < 10) $display("%s [%0d][%0d] %0d != %0d", tag, a, l, rd_data, sb[a][l]);
        end
      end
  endtask

  initial begin
    clear = 0; rd_en = 0; rd_addr = 0; rd_lane = 0;
    upd_en[0] = 0; upd_en[1] = 0; upd_addr[0] = 0; upd_addr[1] = 0;
    foreach (upd_vec[p, l]) upd_vec[p][l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1;
    @(negedge clk); clear = 0;
    foreach (sb[a, l]) sb[a][l] = 0;
    for (int t = 0; t < 400; t++) begin
      for (int p = 0; p < 2; p++) begin
        upd_en[p] = ($urandom_range(0, 3) != 0);
        upd_addr[p] = 4'($urandom_range(0, DEPTH-1));
        for (int l = 0; l < OUT_H; l++) upd_vec[p][l] = 40'($signed(32'($urandom)));
      end
      if (t % 7 == 0) begin upd_en[0] = 1; upd_en[1] = 1; upd_addr[1] = upd_addr[0]; end
      for (int p = 0; p < 2; p++)
        if (upd_en[p])
          for (int l = 0; l < OUT_H; l++) sb[upd_addr[p]][l] += longint'(upd_vec[p][l]);
      @(negedge clk);
    end
    upd_en[0] = 0; upd_en[1] = 0;
    readback("accumulate");
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (sb[a, l]) sb[a][l] = 0;
    readback("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
