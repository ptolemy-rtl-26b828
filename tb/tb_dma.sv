// tb_dma: self-checking test of the DMA.  The path-constructor SRAM is the
// real pc_sram; the partial-sum buffer read port and one DRAM channel are
// behavioural models in this testbench.  The DRAM model accepts requests with
// random back-pressure and answers reads in order after a random latency of
// 1 to 8 cycles.  Random transfers between all legal space pairs (including
// zero-length ones) are checked word by word against shadow copies, with the
// sign extension of 32-bit partial sums into 64-bit words.
module tb_dma;
  import ptolemy_pkg::*;
  localparam int AW = 13, DRW = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  dma_cmd_t cmd;
  logic dr_req_valid, dr_req_we, dr_req_ready, dr_rsp_valid;
  logic [31:0] dr_req_addr;
  logic [PC_W-1:0] dr_req_wdata, dr_rsp_data;
  logic ps_rd_en;
  logic [AW-1:0] ps_rd_addr;
  logic [ACC_W-1:0] ps_rd_data;
  logic pc_en, pc_we;
  logic [AW-1:0] pc_addr;
  logic [PC_W-1:0] pc_wdata, pc_rdata;

  dma dut (.*);

  pc_sram u_pc (
    .clk(clk), .rd_en(1'b0), .rd_addr('0), .rd_data(),
    .wr_en(1'b0), .wr_addr('0), .wr_data('0),
    .x_en(pc_en), .x_we(pc_we), .x_addr(pc_addr), .x_wdata(pc_wdata), .x_rdata(pc_rdata));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- partial-sum read port model ----
  logic [31:0] psmem [1 << AW];
  always @(posedge clk) if (ps_rd_en) ps_rd_data <= psmem[ps_rd_addr];

  // ---- DRAM model: in-order, random ready and latency ----
  logic [63:0] dram [DRW];
  logic [63:0] q_data [$];
  int          q_due  [$];
  int          cyc = 0;
  always @(posedge clk) begin
    cyc++;
    dr_rsp_valid <= 1'b0;
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      dr_rsp_valid <= 1'b1;
      dr_rsp_data  <= q_data.pop_front();
      void'(q_due.pop_front());
    end
    if (dr_req_valid && dr_req_ready) begin
      check(dr_req_addr < DRW, "dram address range");
      if (dr_req_we) dram[dr_req_addr % DRW] = dr_req_wdata;
      else begin
        q_data.push_back(dram[dr_req_addr % DRW]);
        q_due.push_back(cyc + 1 + $urandom % 8);
      end
    end
    dr_req_ready <= ($urandom % 3) != 0;
  end

  logic [63:0] pcs [1 << AW];   // shadow of the path-constructor SRAM
  bit          pcv [1 << AW];   // shadow word has been written

  initial begin
    int len, sa, da;
    space_e ss, ds;
    logic [63:0] src_img [];
    logic [63:0] got;
    dr_rsp_valid = 0; dr_rsp_data = 0; dr_req_ready = 0; ps_rd_data = 0;
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < DRW; i++) dram[i] = {$urandom, $urandom};
    for (int i = 0; i < (1 << AW); i++) begin
      psmem[i] = $urandom;
      pcs[i] = '0;
      pcv[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      ss = space_e'($urandom % 3);
      ds = ($urandom % 2) ? SP_DRAM : SP_PC;
      len = (t % 25 == 0) ? 0 : 1 + $urandom % 40;
      sa = $urandom % 2000; da = $urandom % 2000;
      // choose a PC source that has been written before
      if (ss == SP_PC) begin
        bit ok;
        ok = 0;
        for (int tries = 0; tries < 100 && !ok; tries++) begin
          sa = $urandom % 2000;
          ok = 1;
          for (int i = 0; i < len; i++) if (!pcv[sa + i]) ok = 0;
        end
        if (!ok) ss = SP_DRAM;
      end
      if (ss == ds && sa < da + len && da < sa + len) da = (sa + 2000) % 4000;
      src_img = new[len];
      for (int i = 0; i < len; i++)
        case (ss)
          SP_DRAM: src_img[i] = dram[sa + i];
          SP_PSUM: src_img[i] = 64'(signed'(psmem[sa + i]));
          default: src_img[i] = pcs[sa + i];
        endcase
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1;
      cmd.src_space = ss; cmd.src_addr = sa; cmd.dst_space = ds; cmd.dst_addr = da; cmd.len = len;
      @(negedge clk); cmd_valid = 0;
      while (!done) @(negedge clk);
      for (int i = 0; i < len; i++) begin
        if (ds == SP_DRAM) got = dram[da + i];
        else begin
          pcs[da + i] = src_img[i];
          pcv[da + i] = 1;
          got = src_img[i];
        end
        check(got == src_img[i], "transferred word");
      end
      if (ds == SP_PC && len > 0) begin
        // copy the block back out to DRAM and compare
        @(negedge clk);
        cmd_valid = 1;
        cmd.src_space = SP_PC; cmd.src_addr = da; cmd.dst_space = SP_DRAM; cmd.dst_addr = 3000; cmd.len = len;
        @(negedge clk); cmd_valid = 0;
        while (!done) @(negedge clk);
        for (int i = 0; i < len; i++) check(dram[3000 + i] == src_img[i], "path-constructor copy");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
