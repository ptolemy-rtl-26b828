// tb_pc_sram: self-checking test of the path-constructor SRAM (full 64 KB).
// Random traffic on the unit read/write ports and the DMA port is checked
// against a shadow copy: one-cycle read latency, old data on a same-cycle
// read and write, and the DMA port winning a same-address write.
module tb_pc_sram;
  import ptolemy_pkg::*;
  localparam int AW = 13;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en, wr_en, x_en, x_we;
  logic [AW-1:0] rd_addr, wr_addr, x_addr;
  logic [PC_W-1:0] rd_data, wr_data, x_wdata, x_rdata;

  pc_sram dut (.*);

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

  logic [PC_W-1:0] shadow [1 << AW];

  initial begin
    logic [PC_W-1:0] e_rd, e_x;
    logic c_rd, c_x;
    rd_en = 0; wr_en = 0; x_en = 0; x_we = 0; rd_addr = 0; wr_addr = 0; x_addr = 0;
    wr_data = 0; x_wdata = 0;
    // fill through both write ports
    for (int i = 0; i < (1 << AW); i++) begin
      @(negedge clk);
      shadow[i] = {$urandom, $urandom};
      if (i % 2) begin wr_en = 1; wr_addr = AW'(i); wr_data = shadow[i]; x_en = 0; end
      else begin x_en = 1; x_we = 1; x_addr = AW'(i); x_wdata = shadow[i]; wr_en = 0; end
    end
    @(negedge clk); wr_en = 0; x_en = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      rd_en = $urandom % 2; rd_addr = AW'($urandom % 64);
      wr_en = $urandom % 2; wr_addr = AW'($urandom % 64); wr_data = {$urandom, $urandom};
      x_en = $urandom % 2; x_we = $urandom % 2; x_addr = AW'($urandom % 64); x_wdata = {$urandom, $urandom};
      c_rd = rd_en; e_rd = shadow[rd_addr];
      c_x = x_en && !x_we; e_x = shadow[x_addr];
      if (wr_en) shadow[wr_addr] = wr_data;
      if (x_en && x_we) shadow[x_addr] = x_wdata;
      @(posedge clk); #1;
      if (c_rd) check(rd_data == e_rd, "unit read");
      if (c_x) check(x_rdata == e_x, "dma read");
    end
    @(negedge clk); wr_en = 0; x_en = 0; rd_en = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(i);
      @(posedge clk); #1;
      check(rd_data == shadow[i], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
