// tb_dnn_accel: self-checking test of the extended accelerator at a reduced
// size (4x4 array, 256 activation lines, 4 partial-sum banks of 64 words).
//   1. inf: random A and W loaded through the host port; the requantised
//      result read back is compared with a reference matrix product.
//   2. infsp, partial-sum mode: every stored entry is compared with the
//      expected product A[r][k]*W[k][c] at entry s*DIM*DIM + r*DIM + c with
//      s = k + r + c; the drain stalls are counted.
//   3. infsp that wraps into a half the DMA has not drained: full_stall must
//      appear and clear after the testbench releases the half.
//   4. infsp, mask mode: bit r*DIM+c of step word s is product > thd.
//   5. csps: the partial sums of one neuron of an earlier layer are
//      re-computed into consecutive words and match the reference.
module tb_dnn_accel;
  import ptolemy_pkg::*;
  localparam int DIM = 4, NB = 4, BW = 64, PW = NB * BW, PAW = $clog2(PW);
  localparam int ACT_BYTES = 256 * DIM * 2, AAW = 8;
  localparam int NPE = DIM * DIM;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, csr_we, host_we, host_re, ps_rd_en;
  acc_cmd_t cmd;
  logic [CSR_AW-1:0] csr_addr;
  logic [REG_W-1:0] csr_wdata;
  logic [AAW-1:0] host_waddr, host_raddr;
  logic signed [DATA_W-1:0] host_wdata [DIM], host_rdata [DIM];
  logic [PAW-1:0] ps_rd_addr;
  logic [ACC_W-1:0] ps_rd_data;
  logic [1:0] ps_release, ps_half_full;
  logic drain_stall, full_stall;

  dnn_accel #(.DIM(DIM), .ACT_BYTES(ACT_BYTES), .NLAYER(8), .PS_NBANK(NB), .PS_BANKW(BW)) dut (.*);

  int checks = 0, failures = 0;
  int n_drain = 0, n_full = 0;
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

  always @(posedge clk) begin
    if (drain_stall) n_drain++;
    if (full_stall) n_full++;
  end

  localparam int K = 5;
  logic signed [DATA_W-1:0] A [DIM][K], W [K][DIM];

  task automatic csr(input logic [7:0] ad, input logic [31:0] v);
    @(negedge clk); csr_we = 1; csr_addr = ad; csr_wdata = v;
    @(negedge clk); csr_we = 0;
  endtask

  task automatic host_write(input int addr, input logic signed [DATA_W-1:0] l [DIM]);
    @(negedge clk); host_we = 1; host_waddr = AAW'(addr);
    for (int i = 0; i < DIM; i++) host_wdata[i] = l[i];
    @(negedge clk); host_we = 0;
  endtask

  task automatic host_read(input int addr, output logic signed [DATA_W-1:0] l [DIM]);
    @(negedge clk); host_re = 1; host_raddr = AAW'(addr);
    @(posedge clk); #1;
    l = host_rdata;
    @(negedge clk); host_re = 0;
  endtask

  task automatic issue(input opcode_e op, input int in_a, input int w_a, input int out_a,
                       input int ps_a, input int nid, input int lid);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.in_addr = in_a; cmd.w_addr = w_a;
    cmd.out_addr = out_a; cmd.psum_addr = ps_a; cmd.neuron_id = nid; cmd.layer_id = lid;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

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

  task automatic ps_read(input int addr, output logic [31:0] v);
    @(negedge clk); ps_rd_en = 1; ps_rd_addr = PAW'(addr);
    @(posedge clk); #1;
    v = ps_rd_data;
    @(negedge clk); ps_rd_en = 0;
  endtask

  // check infsp partial-sum layout starting at word base
  task automatic check_psums(input int base);
    logic [31:0] v;
    for (int s = 0; s < K + 2 * DIM - 2; s++)
      for (int r = 0; r < DIM; r++)
        for (int c = 0; c < DIM; c++) begin
          ps_read((base + s * NPE + r * DIM + c) % PW, v);
          check(v == prod(r, s - r - c, c), "partial-sum entry");
        end
  endtask

  initial begin
    logic signed [DATA_W-1:0] l [DIM];
    logic [31:0] v;
    logic signed [31:0] acc, thd;
    int d0, f0;
    cmd_valid = 0; cmd = '0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    host_we = 0; host_re = 0; host_waddr = 0; host_raddr = 0; ps_rd_en = 0; ps_rd_addr = 0;
    ps_release = 0;
    for (int i = 0; i < DIM; i++) host_wdata[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // operands: line k of A at 0+k, line k of W at 16+k
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < DIM; r++) begin
          A[r][k] = 16'($signed($urandom % 2048) - 1024);
          l[r] = A[r][k];
        end
        host_write(k, l);
        for (int c = 0; c < DIM; c++) begin
          W[k][c] = 16'($signed($urandom % 2048) - 1024);
          l[c] = W[k][c];
        end
        host_write(16 + k, l);
      end
      csr(CSR_K, K);
      csr(CSR_LAYER_RST, 0);
      csr(CSR_MODE, 0);
      // 1. inf (layer 0)
      issue(OP_INF, 0, 16, 32, 0, 0, 0);
      for (int r = 0; r < DIM; r++) begin
        host_read(32 + r, l);
        for (int c = 0; c < DIM; c++) begin
          acc = 0;
          for (int k = 0; k < K; k++) acc += prod(r, k, c);
          check(l[c] == rq(acc), "inf result");
        end
      end
      // 2. infsp, partial sums from word 0 (layer 1)
      d0 = n_drain;
      issue(OP_INFSP, 0, 16, 48, 0, 0, 0);
      check(n_drain - d0 == (K + 2 * DIM - 2) * (NPE / NB - 1), "drain stall cycles");
      check(ps_half_full == 2'b11, "both halves full after infsp");
      check_psums(0);
      for (int r = 0; r < DIM; r++) begin
        host_read(48 + r, l);
        for (int c = 0; c < DIM; c++) begin
          acc = 0;
          for (int k = 0; k < K; k++) acc += prod(r, k, c);
          check(l[c] == rq(acc), "infsp result");
        end
      end
      // 3. wrap into half 0, still full (layer 2)
      @(negedge clk); ps_release = 2'b10;
      @(negedge clk); ps_release = 0;
      f0 = n_full;
      fork
        issue(OP_INFSP, 0, 16, 64, 176, 0, 0);
        begin
          while (!full_stall) @(negedge clk);
          repeat (5) @(negedge clk);
          check(full_stall, "held while half full");
          ps_release = 2'b01;
          @(negedge clk); ps_release = 0;
        end
      join
      check(n_full - f0 >= 5, "full stall seen");
      check_psums(176);
      // 4. mask mode (layer 3)
      @(negedge clk); ps_release = 2'b11;
      @(negedge clk); ps_release = 0;
      thd = $signed($urandom % 200000) - 100000;
      csr(CSR_MODE, 1);
      csr(CSR_THD, thd);
      d0 = n_drain;
      issue(OP_INFSP, 0, 16, 80, 8, 0, 0);
      check(n_drain == d0, "masks need no drain stall");
      for (int s = 0; s < K + 2 * DIM - 2; s++) begin
        ps_read(8 + s, v);
        for (int r = 0; r < DIM; r++)
          for (int c = 0; c < DIM; c++) begin
            int k;
            k = s - r - c;
            check(v[r * DIM + c] == ((k >= 0 && k < K) && (prod(r, k, c) > thd)), "mask bit");
          end
      end
      @(negedge clk); ps_release = 2'b11;
      @(negedge clk); ps_release = 0;
      csr(CSR_MODE, 0);
      // 5. csps of every neuron of layer 1 (mask mode must not matter)
      for (int n = 0; n < NPE; n++) begin
        issue(OP_CSPS, 0, 0, 0, 100 + n * 8, n, 1);
        for (int k = 0; k < K; k++) begin
          ps_read(100 + n * 8 + k, v);
          check(v == prod(n / DIM, k, n % DIM), "csps partial sum");
        end
      end
      check(ps_half_full == 2'b00, "csps writes are untracked");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
