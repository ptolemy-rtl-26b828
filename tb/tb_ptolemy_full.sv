// tb_ptolemy_full: the end-to-end detection sequence of tb_ptolemy_top run on
// the design at its full size, with every parameter at its default: the
// 20x20 array, the 1.5 MB activation SRAM, the 32 KB partial-sum buffer in
// 16 banks, the 64 KB path-constructor SRAM and a 256-word program memory.
// Reduction depth K = 20, so one infsp stores (K + 38) * 400 partial sums and
// wraps the buffer several times while the testbench drains halves to DRAM.
// Program 1 runs two infsp layers and a csps; program 2 loops twice over
// findneuron, findrf, sort, an overlapping inf, acum, genmasks and cls.
// Results and mechanism counts are checked as in the reduced test.
module tb_ptolemy_full;
  import ptolemy_pkg::*;
  localparam int DIM = 20, NB = 16, BW = 512, PW = NB * BW, HALF = PW / 2;
  localparam int ACT_BYTES = 1572864, AAW = 16, CD = 256, K = 20, NPE = DIM * DIM;
  localparam int DRW = 65536, CAW = $clog2(CD);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, running, halted, code_we, host_we, host_re, dma_valid, dma_ready, dma_done;
  logic [CAW-1:0] code_addr;
  logic [INSN_W-1:0] code_wdata;
  logic [3:0] dbg_raddr;
  logic [REG_W-1:0] dbg_rdata;
  logic [AAW-1:0] host_waddr, host_raddr;
  logic signed [DATA_W-1:0] host_wdata [DIM], host_rdata [DIM];
  dma_cmd_t dma_cmd;
  logic [1:0] ps_half_full, ps_release;
  logic dr_req_valid, dr_req_we, dr_req_ready, dr_rsp_valid;
  logic [31:0] dr_req_addr;
  logic [PC_W-1:0] dr_req_wdata, dr_rsp_data;
  logic cls_valid;
  logic [31:0] cls_and_cnt, cls_path_cnt, cls_sim;
  logic acc_done, pc_done, acc_busy, pc_busy, unit_stall, dep_stall, drain_stall, full_stall;

  ptolemy_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_drain = 0, n_full = 0, n_unit = 0, n_dep = 0, n_overlap = 0, n_csps = 0;
  int n_dma = 0, n_release = 0, n_loop = 0, n_cls = 0, n_sort = 0;
  always @(posedge clk) begin
    if (drain_stall) n_drain++;
    if (full_stall) n_full++;
    if (unit_stall) n_unit++;
    if (dep_stall) n_dep++;
    if (acc_busy && pc_busy) n_overlap++;
    if (dut.acc_valid && dut.acc_ready && dut.acc_cmd.op == OP_CSPS) n_csps++;
    if (dut.pcu_valid && dut.pcu_ready && dut.pcu_cmd.op == OP_SORT) n_sort++;
    if (dma_done) n_dma++;
    if (ps_release != 0) n_release++;
    if (cls_valid) n_cls++;
    if (dut.u_disp.state == 2 && dut.u_disp.issue && dut.u_disp.d.op == OP_JNE && !dut.u_disp.zflag) n_loop++;
  end

  // ---- DRAM model (in order, random ready and latency) ----
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
      if (dr_req_we) dram[dr_req_addr % DRW] = dr_req_wdata;
      else begin
        q_data.push_back(dram[dr_req_addr % DRW]);
        q_due.push_back(cyc + 1 + $urandom % 6);
      end
    end
    dr_req_ready <= ($urandom % 4) != 0;
  end

  // ---- helpers ----
  logic signed [DATA_W-1:0] A [DIM][K], W [K][DIM];

  function automatic logic signed [31:0] prod(int r, int k, int c);
    if (k < 0 || k >= K) return 0;
    return 32'(A[r][k]) * 32'(W[k][c]);
  endfunction

  function automatic logic signed [15:0] rq(logic signed [31:0] v);
    logic signed [31:0] s;
    s = v >>> 8;
    if (s > 32767) return 16'sh7fff;
    if (s < -32768) return 16'sh8000;
    return s[15:0];
  endfunction

  function automatic logic [23:0] I(opcode_e op, int f1 = 0, int f2 = 0, int f3 = 0, int f4 = 0);
    return {op, 4'(f1), 4'(f2), 4'(f3), 4'(f4), 4'd0};
  endfunction
  function automatic logic [23:0] MOV(int rd, int imm);
    return {OP_MOV, 4'(rd), 16'(imm)};
  endfunction
  function automatic logic [23:0] JNE(int target);
    return {OP_JNE, 4'd0, 16'(target)};
  endfunction
  function automatic logic [23:0] SETCSR(int csr, int rs);
    return {OP_SETCSR, 8'(csr), 4'(rs), 8'd0};
  endfunction

  logic dma_lock = 0;
  task automatic dma_go(input space_e ss, input int sa, input space_e ds, input int da, input int len);
    while (dma_lock) @(negedge clk);
    dma_lock = 1;
    @(negedge clk);
    while (!dma_ready) @(negedge clk);
    dma_valid = 1;
    dma_cmd.src_space = ss; dma_cmd.src_addr = sa; dma_cmd.dst_space = ds;
    dma_cmd.dst_addr = da; dma_cmd.len = len;
    @(negedge clk); dma_valid = 0;
    while (!dma_done) @(negedge clk);
    dma_lock = 0;
  endtask

  task automatic load_run(input logic [23:0] prog [$]);
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk); code_we = 1; code_addr = CAW'(i); code_wdata = prog[i];
    end
    @(negedge clk); code_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!halted) @(negedge clk);
  endtask

  // drainer: copies each full half to DRAM (at 8192 + 128 * n) and releases it
  bit drain_on = 0;
  int n_drained = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (drain_on && ps_half_full != 0) begin
        int h;
        h = ps_half_full[0] ? 0 : 1;
        dma_go(SP_PSUM, h * HALF, SP_DRAM, 16384 + n_drained * HALF, HALF);
        // first drain: half 0 of layer 0, entries s*16 + r*4 + c
        if (n_drained == 0)
          for (int e = 0; e < HALF; e++)
            check(dram[16384 + e] == 64'(signed'(prod((e % NPE) / DIM, e / NPE - (e % NPE) / DIM - e % DIM, e % DIM))),
                  "drained partial sum");
        n_drained++;
        @(negedge clk); ps_release = 2'(1 << h);
        @(negedge clk); ps_release = 0;
      end
    end
  end

  initial begin
    logic [23:0] p1 [$], p2 [$];
    logic signed [DATA_W-1:0] l [DIM];
    logic signed [31:0] v [K], acc;
    int idx [K], n, sum, thr, cnt, loop_top;
    longint cum;
    logic [63:0] cpath, apath;
    start = 0; code_we = 0; code_addr = 0; code_wdata = 0; dbg_raddr = 0;
    host_we = 0; host_re = 0; host_waddr = 0; host_raddr = 0; dma_valid = 0; dma_cmd = '0;
    ps_release = 0; dr_rsp_valid = 0; dr_rsp_data = 0; dr_req_ready = 0;
    for (int i = 0; i < DIM; i++) host_wdata[i] = 0;
    for (int i = 0; i < DRW; i++) dram[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // operands: A lines at 0.., W lines at 32..; small values keep sums in 16 bits
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < DIM; r++) begin A[r][k] = 16'($signed($urandom % 128) - 40); l[r] = A[r][k]; end
      @(negedge clk); host_we = 1; host_waddr = AAW'(k); host_wdata = l;
      for (int c = 0; c < DIM; c++) begin W[k][c] = 16'($signed($urandom % 128) - 40); l[c] = W[k][c]; end
      @(negedge clk); host_waddr = AAW'(32 + k); host_wdata = l;
      @(negedge clk); host_we = 0;
    end
    n = $urandom % NPE;
    // ---------- program 1: two infsp layers and a csps ----------
    p1 = {MOV(1, K), SETCSR(CSR_K, 1), SETCSR(CSR_LAYER_RST, 0), SETCSR(CSR_MODE, 0),
          MOV(2, 0), MOV(3, 32), MOV(4, 64), MOV(5, 0), I(OP_INFSP, 2, 3, 4, 5),
          MOV(4, 64 + DIM), MOV(5, 240), I(OP_INFSP, 2, 3, 4, 5),
          MOV(6, n), MOV(7, 0), MOV(8, 228), I(OP_CSPS, 6, 7, 8),
          I(OP_HALT)};
    drain_on = 1;
    load_run(p1);
    while (ps_half_full != 0 || dma_lock) @(negedge clk);
    repeat (5) @(negedge clk);
    drain_on = 0;
    check(n_drained >= 4, "all halves drained");
    // layer outputs (both layers compute the same product)
    for (int L = 0; L < 2; L++)
      for (int r = 0; r < DIM; r++) begin
        @(negedge clk); host_re = 1; host_raddr = AAW'(64 + DIM * L + r);
        @(posedge clk); #1;
        for (int c = 0; c < DIM; c++) begin
          acc = 0;
          for (int k = 0; k < K; k++) acc += prod(r, k, c);
          check(host_rdata[c] == rq(acc), "layer output");
        end
        @(negedge clk); host_re = 0;
      end
    // re-computed partial sums -> DRAM -> path-constructor SRAM word 0..K-1
    dma_go(SP_PSUM, 228, SP_DRAM, 6000, K);
    for (int k = 0; k < K; k++) begin
      v[k] = prod(n / DIM, k, n % DIM);
      check(dram[6000 + k] == 64'(v[k]), "csps partial sum");
    end
    dma_go(SP_DRAM, 6000, SP_PC, 0, K);
    cpath = {$urandom, $urandom};
    dram[7000] = 64'd0;
    dram[7001] = cpath;
    dma_go(SP_DRAM, 7000, SP_PC, 400, 1);
    dma_go(SP_DRAM, 7001, SP_PC, 500, 1);
    // reference extraction
    sum = 0;
    for (int k = 0; k < K; k++) begin
      idx[k] = k;
      if (v[k] > 0) sum += v[k];
    end
    for (int i = 1; i < K; i++)
      for (int j = i; j > 0 && (v[idx[j]] > v[idx[j-1]] ||
           (v[idx[j]] == v[idx[j-1]] && idx[j] < idx[j-1])); j--) begin
        int t; t = idx[j]; idx[j] = idx[j-1]; idx[j-1] = t;
      end
    sum = sum % 65536;
    thr = sum / 2;                          // theta = 0.5, as mul computes it
    cum = 0; cnt = 0; apath = '0;
    if (thr > 0)
      for (int i = 0; i < K; i++) begin
        cum += v[idx[i]]; cnt++; apath[idx[i]] = 1'b1;
        if (cum >= thr) break;
      end
    // ---------- program 2: extraction loop with overlapping inference ----------
    p2 = {MOV(1, 2), MOV(9, 1000), SETCSR(CSR_LT_OUT, 9), MOV(9, 2000), SETCSR(CSR_LT_PSUM, 9),
          MOV(9, K), SETCSR(CSR_LT_RF, 9), MOV(9, 1), SETCSR(CSR_PATH_WORDS, 9),
          MOV(12, sum), MOV(13, 16'h8000), I(OP_MUL, 12, 13),
          MOV(2, 0), MOV(3, K), MOV(4, 100), MOV(5, 300), MOV(6, 400), MOV(7, 500), MOV(14, n),
          MOV(8, 32), MOV(9, 64 + 2 * DIM)};
    loop_top = p2.size();
    p2 = {p2, I(OP_FINDNEURON, 0, 14, 10), I(OP_FINDRF, 10, 11), I(OP_SORT, 2, 3, 4),
          I(OP_INF, 0, 8, 9), I(OP_ACUM, 4, 5, 12), I(OP_GENMASKS, 5, 6), I(OP_CLS, 7, 6, 15),
          I(OP_DEC, 1), JNE(loop_top), I(OP_HALT)};
    load_run(p2);
    // results
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); dbg_raddr = 4'(r); #1;
      case (r)
        10: check(dbg_rdata == 1000 + n, "findneuron result");
        11: check(dbg_rdata == 2000 + n * K, "findrf result");
        12: check(dbg_rdata == thr, "theta times total");
        15: check(dbg_rdata == ((cnt == 0) ? 0 : ($countones(apath & cpath) << 16) / cnt), "similarity S");
        default: ;
      endcase
    end
    check(cls_path_cnt == cnt && cls_and_cnt == $countones(apath & cpath), "cls counts");
    dma_go(SP_PC, 300, SP_DRAM, 6100, cnt + 1);
    check(dram[6100][31:0] == cnt, "acum count");
    for (int i = 0; i < cnt; i++) check(dram[6101 + i][31:0] == idx[i], "acum tag");
    dma_go(SP_PC, 400, SP_DRAM, 6200, 1);
    check(dram[6200] == apath, "activation path");
    for (int r = 0; r < DIM; r++) begin
      @(negedge clk); host_re = 1; host_raddr = AAW'(64 + 2 * DIM + r);
      @(posedge clk); #1;
      for (int c = 0; c < DIM; c++) begin
        acc = 0;
        for (int k = 0; k < K; k++) acc += prod(r, k, c);
        check(host_rdata[c] == rq(acc), "overlapped inference output");
      end
      @(negedge clk); host_re = 0;
    end
    $display("drain %0d full %0d unit %0d dep %0d overlap %0d csps %0d sort %0d dma %0d release %0d loop %0d cls %0d",
             n_drain, n_full, n_unit, n_dep, n_overlap, n_csps, n_sort, n_dma, n_release, n_loop, n_cls);
    check(n_drain > 0, "drain stall happened");
    check(n_full > 0, "full-half stall happened");
    check(n_unit > 0, "unit stall happened");
    check(n_dep > 0, "dependency stall happened");
    check(n_overlap > 0, "inference overlapped path construction");
    check(n_csps > 0, "csps happened");
    check(n_sort == 2, "sort ran on every loop pass");
    check(n_dma > 0, "dma transfers happened");
    check(n_release > 0, "half release happened");
    check(n_loop > 0, "loop branch taken");
    check(n_cls == 2, "cls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
