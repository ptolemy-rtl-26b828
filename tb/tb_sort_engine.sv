// tb_sort_engine: self-checking test of sort & merge.  Random sequences of
// many lengths (one element, partial groups, exactly 16, lengths needing one
// and two merge passes) are sorted; the result at dst must be in descending
// order with each tag pointing back at its original value, every tag must
// appear once, and nothing outside dst .. dst+2*len may be written.  Also
// checks that run formation is memory-bound: about one cycle per element.
module tb_sort_engine;
  import ptolemy_pkg::*;
  localparam int AW = 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rd_en, wr_en;
  logic [AW-1:0] src, dst, rd_addr, wr_addr;
  logic [31:0] len;
  logic [PC_W-1:0] rd_data, wr_data;

  sort_engine #(.AW(AW)) dut (.*);

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
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lens [12] = '{1, 5, 16, 17, 31, 64, 200, 256, 257, 700, 1000, 2000};

  initial begin
    start = 0; src = 0; dst = 0; len = 0;
    for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int n, cyc;
      logic signed [31:0] orig [2000];
      bit seen [2000];
      n = lens[trial];
      for (int i = 0; i < n; i++) begin
        orig[i] = (trial % 3 == 0) ? $signed($urandom % 11) - 5 : $signed($urandom);
        mem[i]  = {32'hdead_beef, orig[i]};
        seen[i] = 0;
      end
      mem[2000 + 2 * n] = 64'h1234;
      @(negedge clk);
      src = 0; dst = 2000; len = n; start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      for (int i = 0; i < n; i++) begin
        entry_t e;
        e = entry_t'(mem[2000 + i]);
        if (i > 0) check(!entry_ahead(e, entry_t'(mem[2000 + i - 1])), "descending order");
        check(e.tag < n && !seen[e.tag], "tag unique");
        if (e.tag < n) begin
          check(e.val == orig[e.tag], "value matches tag");
          seen[e.tag] = 1;
        end
      end
      check(mem[2000 + 2 * n] == 64'h1234, "no write past the scratch area");
      if (n == 256) check(cyc < 2 * n + 3 * n + 200, "cycle budget for 256 elements");
      if (n <= 16)  check(cyc < n + 40, "run formation about one cycle per element");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
