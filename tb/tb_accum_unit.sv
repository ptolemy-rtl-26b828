// tb_accum_unit: self-checking test of the accumulate unit.  First the
// fully-connected example of the important-neuron figure: the partial sums
// 0.21, 0.09, 0.08, 0.06, 0.02 (input neurons 4, 3, 1, 0, 2) against
// theta * n = 0.6 * 0.46 must select neurons 4 and 3.  Then random sorted
// sequences and thresholds against a reference model (including thresholds
// that are never reached and thresholds <= 0).
module tb_accum_unit;
  import ptolemy_pkg::*;
  localparam int AW = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rd_en, wr_en;
  logic [AW-1:0] src, dst, rd_addr, wr_addr;
  logic [31:0] len, count;
  logic signed [31:0] thr;
  logic [PC_W-1:0] rd_data, wr_data;

  accum_unit #(.AW(AW)) dut (.*);

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

  function automatic logic signed [31:0] q16(input real x);
    return $rtoi(x * 65536.0);
  endfunction

  task automatic go(input int n, input logic signed [31:0] t);
    @(negedge clk);
    src = 0; dst = 512; len = n; thr = t; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    start = 0; src = 0; dst = 0; len = 0; thr = 0;
    for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the paper's fully-connected example
    mem[0] = {32'd4, q16(0.21)};
    mem[1] = {32'd3, q16(0.09)};
    mem[2] = {32'd1, q16(0.08)};
    mem[3] = {32'd0, q16(0.06)};
    mem[4] = {32'd2, q16(0.02)};
    go(5, q16(0.6 * 0.46));
    check(mem[512][31:0] == 2, "figure example count");
    check(mem[513][31:0] == 4 && mem[514][31:0] == 3, "figure example neurons 4 and 3");
    // random
    for (int trial = 0; trial < 200; trial++) begin
      int n, exp_n;
      logic signed [63:0] cum;
      logic signed [31:0] t;
      int v;
      n = 1 + $urandom % 200;
      v = 5000;
      for (int i = 0; i < n; i++) begin
        v = v - ($urandom % 100);
        mem[i] = {32'(i * 7 + 1), 32'(v)};
      end
      case (trial % 4)
        0: t = -5;
        1: t = 32'sh7fff_ffff;
        default: t = $urandom % 200000;
      endcase
      cum = 0; exp_n = 0;
      while (exp_n < n && cum < 64'(t)) begin
        cum += 64'(signed'(mem[exp_n][31:0]));
        exp_n++;
      end
      go(n, t);
      check(mem[512][31:0] == 32'(exp_n), "count");
      check(count == 32'(exp_n), "count output");
      for (int i = 0; i < exp_n; i++) check(mem[513 + i][31:0] == 32'(i * 7 + 1), "tag list");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
