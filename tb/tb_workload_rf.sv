// tb_workload_rf: receptive fields of the sizes the evaluated networks have,
// run through the path constructor at full size with theta = 0.5:
// 3*3*64 = 576 (ResNet18 first stage), 3*3*256 = 2304 (ResNet18 third stage,
// AlexNet conv3) and 2730, the longest sequence one sort can hold in the
// 64 KB SRAM (source plus a 2*len destination in 8192 words).  Partial sums
// are random, mostly positive.  Each field goes through sort, acum, genmasks
// and cls; results are compared with a reference model, and the sort's cycle
// count is printed.  The acum list overwrites the consumed source.
module tb_workload_rf;
  import ptolemy_pkg::*;
  localparam int AW = 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, res_valid, op_done, csr_we, x_en, x_we, cls_valid;
  pc_cmd_t cmd;
  logic [3:0] res_rd;
  logic [REG_W-1:0] res_data, csr_wdata;
  logic [CSR_AW-1:0] csr_addr;
  logic [AW-1:0] x_addr;
  logic [PC_W-1:0] x_wdata, x_rdata;
  logic [31:0] cls_and_cnt, cls_path_cnt, cls_sim;

  path_ctor dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xw(input int a, input logic [63:0] d);
    @(negedge clk); x_en = 1; x_we = 1; x_addr = AW'(a); x_wdata = d;
    @(negedge clk); x_en = 0; x_we = 0;
  endtask

  task automatic xr(input int a, output logic [63:0] d);
    @(negedge clk); x_en = 1; x_we = 0; x_addr = AW'(a);
    @(posedge clk); #1 d = x_rdata;
    @(negedge clk); x_en = 0;
  endtask

  task automatic csr(input logic [7:0] ad, input logic [31:0] v);
    @(negedge clk); csr_we = 1; csr_addr = ad; csr_wdata = v;
    @(negedge clk); csr_we = 0;
  endtask

  // issue and wait for completion; returns the register result if any
  task automatic run(input opcode_e op, input int a, input int b, input int c,
                     input logic [3:0] rd, output logic [31:0] res);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.a = a; cmd.b = b; cmd.c = c; cmd.rd = rd;
    @(negedge clk); cmd_valid = 0;
    res = 'x;
    while (!op_done) begin
      @(posedge clk); #1;
      if (res_valid) begin
        res = res_data;
        check(res_rd == rd, "result register");
      end
    end
  endtask

  localparam int SRC = 0, DST = 2730, LIST = 0, PATH = 8000, CPATH = 8064;

  initial begin
    int L, thr, cnt, nw, ac, pc;
    logic signed [31:0] v [];
    int idx [];
    logic [63:0] d, ap [], cp [];
    logic [31:0] res;
    longint sum;
    time t0;
    cmd_valid = 0; cmd = '0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    x_en = 0; x_we = 0; x_addr = 0; x_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3; it++) begin
      L = (it == 0) ? 576 : (it == 1) ? 2304 : 2730;
      v = new[L]; idx = new[L];
      sum = 0;
      for (int i = 0; i < L; i++) begin
        // mostly positive partial sums with a few negative ones, some ties
        v[i] = $signed($urandom % 200000) - 50000;
        idx[i] = i;
        if (v[i] > 0) sum += v[i];
        xw(SRC + i, {$urandom, v[i]});
      end
      // reference sort: descending value, ties by smaller tag
      for (int i = 1; i < L; i++)
        for (int j = i; j > 0 && (v[idx[j]] > v[idx[j-1]] ||
             (v[idx[j]] == v[idx[j-1]] && idx[j] < idx[j-1])); j--) begin
          int t; t = idx[j]; idx[j] = idx[j-1]; idx[j-1] = t;
        end
      t0 = $time;
      run(OP_SORT, SRC, L, DST, 0, res);
      $display("sort of %0d partial sums: %0d cycles", L, ($time - t0) / 10);
      for (int i = 0; i < L; i++) begin
        xr(DST + i, d);
        check(d[31:0] == v[idx[i]] && d[63:32] == idx[i], "sorted entry");
      end
      // acum with theta = 0.5 of the positive total
      thr = int'(sum / 2);
      run(OP_ACUM, DST, LIST, thr, 0, res);
      begin
        longint cum; cum = 0; cnt = 0;
        if (thr > 0)
          for (int i = 0; i < L; i++) begin
            cum += v[idx[i]]; cnt++;
            if (cum >= thr) break;
          end
      end
      xr(LIST, d);
      check(d[31:0] == cnt, "acum count");
      for (int i = 0; i < cnt; i++) begin
        xr(LIST + 1 + i, d);
        check(d[31:0] == idx[i], "acum tag");
      end
      // genmasks into a cleared path, then cls against a random class path
      nw = (L + 63) / 64;
      ap = new[nw]; cp = new[nw];
      for (int w = 0; w < nw; w++) begin
        ap[w] = '0;
        cp[w] = {$urandom, $urandom};
        xw(PATH + w, 64'd0);
        xw(CPATH + w, cp[w]);
      end
      for (int i = 0; i < cnt; i++) ap[idx[i] / 64][idx[i] % 64] = 1'b1;
      run(OP_GENMASKS, LIST, PATH, 0, 0, res);
      for (int w = 0; w < nw; w++) begin
        xr(PATH + w, d);
        check(d == ap[w], "path bits");
      end
      csr(CSR_PATH_WORDS, nw);
      run(OP_CLS, CPATH, PATH, 0, 4'(it), res);
      ac = 0; pc = 0;
      for (int w = 0; w < nw; w++) begin
        ac += $countones(ap[w] & cp[w]);
        pc += $countones(ap[w]);
      end
      check(cls_and_cnt == ac && cls_path_cnt == pc, "cls counts");
      check(res == ((pc == 0) ? 0 : 32'((longint'(ac) << 16) / pc)), "cls similarity");
    end
    // address generation (as in the block test)
    for (int l = 0; l < 16; l++) begin
      csr(CSR_LT_OUT + 8'(l), 1000 * l);
      csr(CSR_LT_PSUM + 8'(l), 50000 + 7 * l);
      csr(CSR_LT_RF + 8'(l), 9 * (l + 1));
    end
    for (int n = 0; n < 50; n++) begin
      int l, p;
      l = $urandom % 16; p = $urandom % 1000;
      run(OP_FINDNEURON, l, p, 0, 4'd3, res);
      check(res == 1000 * l + p, "findneuron");
      run(OP_FINDRF, res, 0, 0, 4'd5, res);
      check(res == 50000 + 7 * l + p * 9 * (l + 1), "findrf");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
