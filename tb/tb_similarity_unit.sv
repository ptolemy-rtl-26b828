// tb_similarity_unit: self-checking test of path similarity.  Random class
// and activation paths of random length (and density) give
// S = |P & Pc| / |P| in Q16.16, checked against a reference computed here,
// together with both popcounts; an all-zero activation path must give S = 0.
module tb_similarity_unit;
  import ptolemy_pkg::*;
  localparam int AW = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rd_en;
  logic [AW-1:0] cp_addr, ap_addr, rd_addr;
  logic [31:0] nwords, and_cnt, path_cnt, sim;
  logic [PC_W-1:0] rd_data;

  similarity_unit #(.AW(AW)) dut (.*);

  logic [PC_W-1:0] mem [1 << AW];
  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

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
    start = 0; cp_addr = 0; ap_addr = 0; nwords = 0;
    for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 100; trial++) begin
      int n;
      longint a, p;
      longint unsigned s;
      n = 1 + $urandom % 60;
      a = 0; p = 0;
      for (int w = 0; w < n; w++) begin
        mem[w]       = {$urandom, $urandom};
        mem[300 + w] = (trial == 0) ? '0 : ({$urandom, $urandom} & {$urandom, $urandom});
        a += $countones(mem[w] & mem[300 + w]);
        p += $countones(mem[300 + w]);
      end
      s = (p == 0) ? 0 : (longint'(a) << 16) / p;
      @(negedge clk);
      cp_addr = 0; ap_addr = 300; nwords = n; start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      check(and_cnt == 32'(a), "and count");
      check(path_cnt == 32'(p), "path count");
      check(sim == 32'(s), "similarity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
