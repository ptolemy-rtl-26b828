// tb_enhanced_mac: self-checking test of one enhanced PE.  Drives random
// operand pairs with random enable, threshold and mode, and compares the
// registered operands, the accumulator, the threshold comparison and the
// mode multiplexer with a reference model kept in the testbench.
module tb_enhanced_mac;
  import ptolemy_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, clr, mode, v_in, v_out, sram_valid;
  logic signed [ACC_W-1:0]  thd, psum, sram_out;
  logic signed [DATA_W-1:0] a_in, w_in, a_out, w_out;

  enhanced_mac dut (.*);

  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0]  ref_acc;
  logic signed [DATA_W-1:0] ref_a, ref_w;
  logic                     ref_v;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [ACC_W-1:0] p;
    en = 0; clr = 0; mode = 0; thd = 0; a_in = 0; w_in = 0; v_in = 0;
    ref_acc = 0; ref_a = 0; ref_w = 0; ref_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // example from the paper's figure: 1.0 x 0.09 style products in Q8.8
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en   = ($urandom % 4) != 0;
      clr  = ($urandom % 50) == 0;
      mode = $urandom % 2;
      thd  = $signed($urandom % 65536) - 32768;
      a_in = $signed(16'($urandom));
      w_in = $signed(16'($urandom));
      v_in = $urandom % 2;
      #1;
      // combinational outputs from the held operands
      p = 32'(ref_a) * 32'(ref_w);
      check(a_out == ref_a && w_out == ref_w && v_out == ref_v, "operand registers");
      check(sram_out == (mode ? 32'(p > thd) : p), "mode mux / comparator");
      check(sram_valid == ref_v, "valid");
      check(psum == ref_acc, "accumulator");
      @(posedge clk);
      if (clr) ref_acc = 0;
      else if (en) ref_acc = ref_acc + p;
      if (en) begin ref_a = a_in; ref_w = w_in; ref_v = v_in; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
