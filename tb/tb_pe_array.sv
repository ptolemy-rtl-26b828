// tb_pe_array: self-checking test of the systolic array (reduced to 6x6).
// Multiplies random K-deep matrices with random stall cycles and compares
// every accumulator with a reference product; during the run it also checks
// that each PE's captured product equals A[r][k]*W[k][c] for the k the skew
// predicts (k = step - r - c).  A second pass enables only row 0 and checks
// that the other rows stay idle.
module tb_pe_array;
  import ptolemy_pkg::*;
  localparam int D = 6;
  localparam int K = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, clr, mode, a_valid;
  logic [D-1:0] row_en;
  logic signed [ACC_W-1:0]  thd;
  logic signed [DATA_W-1:0] a_line [D];
  logic signed [DATA_W-1:0] w_line [D];
  logic signed [ACC_W-1:0]  psum [D][D];
  logic signed [ACC_W-1:0]  sram_out [D][D];
  logic                     sram_valid [D][D];

  pe_array #(.DIM(D)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] A [D][K];
  logic signed [DATA_W-1:0] W [K][D];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [D-1:0] rows);
    int t;
    for (int r = 0; r < D; r++) for (int k = 0; k < K; k++) A[r][k] = $signed(16'($urandom % 512)) - 256;
    for (int k = 0; k < K; k++) for (int c = 0; c < D; c++) W[k][c] = $signed(16'($urandom % 512)) - 256;
    @(negedge clk);
    clr = 1; en = 0; row_en = rows;
    @(negedge clk);
    clr = 0;
    t = 0;
    while (t < K + 2 * D) begin
      en = ($urandom % 3) != 0;
      for (int i = 0; i < D; i++) begin
        a_line[i] = (t < K) ? A[i][t] : '0;
        w_line[i] = (t < K) ? W[t][i] : '0;
      end
      a_valid = (t < K);
      #1;
      // products visible now were loaded at the previous enabled step t-1
      for (int r = 0; r < D; r++)
        for (int c = 0; c < D; c++) begin
          int k;
          k = t - 1 - r - c;
          if (rows[r] && k >= 0 && k < K) begin
            check(sram_valid[r][c] && sram_out[r][c] == 32'(A[r][k]) * 32'(W[k][c]), "captured product");
          end
        end
      @(negedge clk);
      if (en) t++;
    end
    en = 1;
    repeat (2) @(negedge clk);
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        logic signed [ACC_W-1:0] ref_v;
        ref_v = 0;
        if (rows[r]) for (int k = 0; k < K; k++) ref_v += 32'(A[r][k]) * 32'(W[k][c]);
        check(psum[r][c] == ref_v, "accumulator");
      end
  endtask

  initial begin
    en = 0; clr = 0; mode = 0; thd = 0; a_valid = 0; row_en = '1;
    for (int i = 0; i < D; i++) begin a_line[i] = 0; w_line[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) run('1);
    run(D'(1));   // re-computation mode: row 0 only
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
