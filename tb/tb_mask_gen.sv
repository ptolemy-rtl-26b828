// tb_mask_gen: self-checking test of mask generation.  Random tag lists
// (with repeats) are turned into bits of a path bit vector that already holds
// random bits; the result must be the old vector OR the bits of the tags.
module tb_mask_gen;
  import ptolemy_pkg::*;
  localparam int AW = 10;
  localparam int NW = 8;          // path words

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rd_en, wr_en;
  logic [AW-1:0] src, dst, rd_addr, wr_addr;
  logic [PC_W-1:0] rd_data, wr_data;

  mask_gen #(.AW(AW)) dut (.*);

  logic [PC_W-1:0] mem [1 << AW];
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PC_W-1:0] expv [NW];
    start = 0; src = 0; dst = 0;
    for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 100; trial++) begin
      int n;
      n = $urandom % 40;
      for (int w = 0; w < NW; w++) begin
        mem[600 + w] = (trial % 2) ? {$urandom, $urandom} : '0;
        expv[w] = mem[600 + w];
      end
      mem[100] = PC_W'(n);
      for (int i = 0; i < n; i++) begin
        int t;
        t = $urandom % (NW * PC_W);
        mem[101 + i] = PC_W'(t);
        expv[t / PC_W][t % PC_W] = 1'b1;
      end
      @(negedge clk);
      src = 100; dst = 600; start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      for (int w = 0; w < NW; w++) check(mem[600 + w] == expv[w], "path word");
      check(mem[600 + NW] == '0, "no write beyond the path");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
