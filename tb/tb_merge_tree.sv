// tb_merge_tree: self-checking test of the 16-way merge tree.  Sixteen random
// descending runs of random length are fed through the load/pop protocol
// (a popped leaf is refilled from its run one cycle later); the merged
// stream must be in order and contain every element exactly once.
module tb_merge_tree;
  import ptolemy_pkg::*;
  localparam int NW = 16;
  localparam int RL = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, load_valid, pop, out_valid;
  logic [3:0] load_leaf, out_leaf;
  entry_t load_data, out_data;

  merge_tree #(.NWAY(NW)) dut (.*);

  int checks = 0, failures = 0;
  entry_t runs [NW][RL];
  int     rlen [NW];
  int     ptr  [NW];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; load_valid = 0; pop = 0; load_leaf = 0; load_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      int total, got;
      entry_t prev;
      logic [NW*RL-1:0] seen;
      total = 0;
      for (int l = 0; l < NW; l++) begin
        int v;
        rlen[l] = $urandom % (RL + 1);
        v = 1000;
        for (int i = 0; i < rlen[l]; i++) begin
          v = v - ($urandom % 20);
          runs[l][i].val = v;
          runs[l][i].tag = 32'(l * RL + i);
        end
        ptr[l] = 0;
        total += rlen[l];
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      // initial fill
      for (int l = 0; l < NW; l++) if (rlen[l] > 0) begin
        load_valid = 1; load_leaf = 4'(l); load_data = runs[l][0]; ptr[l] = 1;
        @(negedge clk);
      end
      load_valid = 0;
      got = 0; seen = '0;
      while (out_valid) begin
        int w;
        w = out_leaf;
        if (got > 0) check(!entry_ahead(out_data, prev), "merged order");
        check(out_data == runs[w][ptr[w]-1], "winner comes from its leaf");
        check(!seen[out_data.tag], "no duplicate");
        seen[out_data.tag] = 1'b1;
        prev = out_data;
        got++;
        pop = 1;
        @(negedge clk);
        pop = 0;
        if (ptr[w] < rlen[w]) begin
          load_valid = 1; load_leaf = 4'(w); load_data = runs[w][ptr[w]]; ptr[w]++;
          @(negedge clk);
          load_valid = 0;
        end
      end
      check(got == total, "all elements merged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
