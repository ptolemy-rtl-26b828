// tb_sort_unit: self-checking test of the 16-element sorting network.
// Random (value, tag) sets, including many equal values, are sorted and the
// output is checked to be in order (value descending, then tag ascending) and
// to be a permutation of the input (same multiset of tags), one cycle later.
module tb_sort_unit;
  import ptolemy_pkg::*;
  localparam int N = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   in_valid, out_valid;
  entry_t in  [N];
  entry_t out [N];

  sort_unit #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

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

  initial begin
    entry_t saved [N];
    in_valid = 0;
    for (int i = 0; i < N; i++) in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < N; i++) begin
        in[i].tag = 32'(i);
        in[i].val = (n % 2) ? $signed($urandom % 7) - 3 : $signed($urandom);
        saved[i]  = in[i];
      end
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "latency 1");
      for (int i = 0; i + 1 < N; i++)
        check(entry_ahead(out[i], out[i+1]), "order");
      begin
        logic [N-1:0] seen;
        seen = '0;
        for (int i = 0; i < N; i++) begin
          seen[out[i].tag[3:0]] = 1'b1;
          check(out[i].val == saved[out[i].tag[3:0]].val, "value kept with its tag");
        end
        check(seen == '1, "permutation");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
