// tb_dispatcher: self-checking test of the instruction dispatcher.  The
// accelerator and the path constructor are modelled in the testbench: each
// accepts a command when idle and stays busy for a random number of cycles;
// the path-constructor model answers findneuron (a+b), findrf (3a+1) and cls
// (a^b) on the result bus when it finishes.  A reference interpreter runs the
// same program and produces the expected command streams of both units and
// the final register file.  The program has a counted loop (dec/jne),
// register dependencies through findneuron/findrf/cls results, mul and
// setcsr, so unit stalls, dependency stalls and the halt drain all occur.
module tb_dispatcher;
  import ptolemy_pkg::*;
  localparam int CD = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, running, halted, code_we;
  logic [5:0] code_addr;
  logic [INSN_W-1:0] code_wdata;
  logic acc_valid, acc_ready, pc_valid, pc_ready, res_valid, csr_we, unit_stall, dep_stall;
  acc_cmd_t acc_cmd;
  pc_cmd_t pc_cmd;
  logic [3:0] res_rd, dbg_raddr;
  logic [REG_W-1:0] res_data, csr_wdata, dbg_rdata;
  logic [CSR_AW-1:0] csr_addr;

  dispatcher #(.CODE_DEPTH(CD)) dut (.*);

  int checks = 0, failures = 0, n_unit = 0, n_dep = 0;
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

  // ---- unit models ----
  int acc_left = 0, pc_left = 0;
  pc_cmd_t pc_q;
  logic [95:0] acc_log [$], pc_log [$], csr_log [$];
  always @(posedge clk) begin
    res_valid <= 1'b0;
    if (acc_left > 0) acc_left--;
    if (acc_valid && acc_ready) begin
      acc_log.push_back({28'(acc_cmd.op), acc_cmd.in_addr, acc_cmd.w_addr, acc_cmd.out_addr} ^
                        {64'd0, acc_cmd.psum_addr});
      acc_left = 1 + $urandom % 30;
    end
    if (pc_left > 0) begin
      pc_left--;
      if (pc_left == 0 && pc_q.op inside {OP_FINDNEURON, OP_FINDRF, OP_CLS}) begin
        res_valid <= 1'b1;
        res_rd    <= pc_q.rd;
        res_data  <= (pc_q.op == OP_FINDNEURON) ? pc_q.a + pc_q.b :
                     (pc_q.op == OP_FINDRF) ? 3 * pc_q.a + 1 : pc_q.a ^ pc_q.b;
      end
    end
    if (pc_valid && pc_ready) begin
      pc_log.push_back({pc_cmd.op, pc_cmd.rd, 24'd0, pc_cmd.a, pc_cmd.b} ^ {pc_cmd.c, 64'd0});
      pc_q = pc_cmd;
      pc_left = 1 + $urandom % 20;
    end
    if (csr_we) csr_log.push_back({csr_addr, csr_wdata});
    if (unit_stall) n_unit++;
    if (dep_stall) n_dep++;
    acc_ready <= (acc_left == 0);
    pc_ready  <= (pc_left == 0);
  end

  function automatic logic [23:0] I(opcode_e op, int f1 = 0, int f2 = 0, int f3 = 0, int f4 = 0, int f5 = 0);
    return {op, 4'(f1), 4'(f2), 4'(f3), 4'(f4), 4'(f5)};
  endfunction
  function automatic logic [23:0] IMM(opcode_e op, int f1, int imm);
    return {op, 4'(f1), 16'(imm)};
  endfunction

  logic [23:0] prog [$];
  logic [31:0] rr [16];
  logic [95:0] e_acc [$], e_pc [$], e_csr [$];

  // reference interpreter
  task automatic interpret();
    int p; bit z; logic [23:0] w; insn_t d;
    // registers keep their values from the previous run, as in the hardware
    p = 0; z = 0;
    for (int steps = 0; steps < 10000; steps++) begin
      w = prog[p]; d = insn_t'(w); p++;
      case (d.op)
        OP_INF, OP_INFSP:
          e_acc.push_back({28'(d.op), rr[d.f1], rr[d.f2], rr[d.f3]} ^ {64'd0, (d.op == OP_INFSP) ? rr[d.f4] : rr[d.f4]});
        OP_CSPS:
          e_acc.push_back({28'(d.op), rr[d.f1], rr[d.f2], rr[d.f3]} ^ {64'd0, rr[d.f3]});
        OP_SORT, OP_ACUM, OP_GENMASKS:
          e_pc.push_back({d.op, 4'd0, 24'd0, rr[d.f1], rr[d.f2]} ^ {rr[d.f3], 64'd0});
        OP_FINDNEURON: begin
          e_pc.push_back({d.op, d.f3, 24'd0, rr[d.f1], rr[d.f2]} ^ {rr[d.f3], 64'd0});
          rr[d.f3] = rr[d.f1] + rr[d.f2];
        end
        OP_FINDRF: begin
          e_pc.push_back({d.op, d.f2, 24'd0, rr[d.f1], rr[d.f2]} ^ {rr[d.f3], 64'd0});
          rr[d.f2] = 3 * rr[d.f1] + 1;
        end
        OP_CLS: begin
          e_pc.push_back({d.op, d.f3, 24'd0, rr[d.f1], rr[d.f2]} ^ {rr[d.f3], 64'd0});
          rr[d.f3] = rr[d.f1] ^ rr[d.f2];
        end
        OP_MOV: rr[d.f1] = 32'(w[15:0]);
        OP_DEC: begin rr[d.f1] = rr[d.f1] - 1; z = (rr[d.f1] == 0); end
        OP_JNE: if (!z) p = int'(w[15:0]);
        OP_MUL: rr[d.f1] = 32'((64'(signed'(rr[d.f1])) * 64'(signed'(rr[d.f2]))) >>> 16);
        OP_SETCSR: e_csr.push_back({64'd0, d.f1, d.f2, rr[d.f3]});
        OP_HALT: return;
        default: ;
      endcase
    end
  endtask

  initial begin
    int base;
    start = 0; code_we = 0; code_addr = 0; code_wdata = 0; dbg_raddr = 0;
    res_valid = 0; res_rd = 0; res_data = 0; acc_ready = 1; pc_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++) rr[r] = 0;
    for (int run = 0; run < 4; run++) begin
      prog.delete();
      prog.push_back(IMM(OP_MOV, 1, 3 + run));           // loop count
      prog.push_back(IMM(OP_MOV, 2, $urandom));
      prog.push_back(IMM(OP_MOV, 3, $urandom));
      prog.push_back(IMM(OP_MOV, 6, 16'h8000));          // 0.5 in Q16.16
      prog.push_back(IMM(OP_MOV, 7, 16'h0003));
      base = prog.size();
      prog.push_back(I(OP_INFSP, 2, 3, 1, 7));
      prog.push_back(I(OP_FINDNEURON, 1, 2, 4));
      prog.push_back(I(OP_FINDRF, 4, 5));                 // waits for r4
      prog.push_back(I(OP_CSPS, 5, 1, 7));                // waits for r5
      prog.push_back(I(OP_SORT, 5, 7, 3));
      prog.push_back(I(OP_INF, 3, 2, 5));                 // overlaps with sort
      prog.push_back(I(OP_ACUM, 3, 8, 2));
      prog.push_back(I(OP_GENMASKS, 8, 9));
      prog.push_back(I(OP_CLS, 2, 3, 10));
      prog.push_back(I(OP_MUL, 10, 6));                   // waits for r10
      prog.push_back(I(OP_SETCSR, 0, 4, 10));
      prog.push_back(I(OP_NOP));
      prog.push_back(I(OP_DEC, 1));
      prog.push_back(IMM(OP_JNE, 0, base));
      prog.push_back(I(OP_CLS, 1, 2, 11));
      prog.push_back(I(OP_HALT));
      for (int i = 0; i < prog.size(); i++) begin
        @(negedge clk); code_we = 1; code_addr = 6'(i); code_wdata = prog[i];
      end
      @(negedge clk); code_we = 0;
      e_acc.delete(); e_pc.delete(); e_csr.delete();
      acc_log.delete(); pc_log.delete(); csr_log.delete();
      interpret();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      check(running, "running after start");
      while (!halted) @(negedge clk);
      check(acc_ready && pc_ready, "halt waits for the units");
      check(acc_log.size() == e_acc.size(), "accelerator command count");
      foreach (e_acc[i]) if (i < acc_log.size()) check(acc_log[i] == e_acc[i], "accelerator command");
      check(pc_log.size() == e_pc.size(), "path-constructor command count");
      foreach (e_pc[i]) if (i < pc_log.size()) check(pc_log[i] == e_pc[i], "path-constructor command");
      check(csr_log.size() == e_csr.size(), "csr write count");
      foreach (e_csr[i]) if (i < csr_log.size()) check(csr_log[i] == e_csr[i], "csr write");
      for (int r = 0; r < 16; r++) begin
        @(negedge clk); dbg_raddr = 4'(r); #1;
        check(dbg_rdata == rr[r], "final register");
      end
    end
    check(n_unit > 0, "unit stalls occurred");
    check(n_dep > 0, "dependency stalls occurred");
    $display("unit stalls %0d, dependency stalls %0d", n_unit, n_dep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
