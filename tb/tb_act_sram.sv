// tb_act_sram: self-checking test of the activation/weight SRAM at its
// full 1.5 MB size.  Random line writes followed by random reads on both read
// ports, checked against a shadow copy of the touched lines; read latency is
// one cycle.
module tb_act_sram;
  import ptolemy_pkg::*;
  localparam int DIM = 20;
  localparam int LINES = 1572864 / (DIM * 2);
  localparam int AW = $clog2(LINES);

  logic clk = 0;
  always #5 clk = ~clk;

  logic ra_en, rb_en, we;
  logic [AW-1:0] ra_addr, rb_addr, waddr;
  logic signed [DATA_W-1:0] ra_data [DIM], rb_data [DIM], wdata [DIM];

  act_sram dut (.*);

  int checks = 0, failures = 0;
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

  logic signed [DATA_W-1:0] shadow [256][DIM];
  logic [AW-1:0] where [256];

  initial begin
    int i, j;
    ra_en = 0; rb_en = 0; we = 0; ra_addr = 0; rb_addr = 0; waddr = 0;
    for (int c = 0; c < DIM; c++) wdata[c] = 0;
    for (i = 0; i < 256; i++) begin
      // spread the lines over the whole array, top line included
      where[i] = (i == 255) ? AW'(LINES - 1) : AW'(i * (LINES / 256));
      @(negedge clk);
      we = 1; waddr = where[i];
      for (int c = 0; c < DIM; c++) begin
        shadow[i][c] = DATA_W'($urandom);
        wdata[c] = shadow[i][c];
      end
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      i = $urandom % 256; j = $urandom % 256;
      @(negedge clk); ra_en = 1; ra_addr = where[i]; rb_en = 1; rb_addr = where[j];
      @(posedge clk); #1;
      for (int c = 0; c < DIM; c++) begin
        check(ra_data[c] == shadow[i][c], "port a");
        check(rb_data[c] == shadow[j][c], "port b");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
