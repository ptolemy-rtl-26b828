// dispatcher: fetches, decodes and issues the 24-bit instructions of a
// detection program.
//
// The program lives in the controller's code SRAM (CODE_DEPTH words, loaded
// through the code_* port).  After start, instructions are fetched from
// address 0 and executed in order.  Inference instructions go to the DNN
// accelerator, path-construction and classification instructions to the path
// constructor; scalar instructions (mov, dec, jne, mul, setcsr) execute here.
// Since both units run for many cycles, an instruction for an idle unit is
// issued while the other unit is still busy: this is what lets inference of
// layer j+1 overlap extraction of layer j when the compiler orders the code
// that way.  Hardware keeps the order safe: an instruction waits while its
// unit is busy (unit stall) or while one of its registers is still to be
// written by a findneuron, findrf or cls in flight (dependency stall, a
// 16-entry scoreboard).  halt waits for both units and the scoreboard to
// drain.
//
// Published: the 24-bit encoding with a 4-bit opcode in bits 23-20, register
// operands, 16 general-purpose registers, in-order issue with dependency
// checks and stalls.  The paper interprets the code in software on a
// micro-controller; doing it in this small FSM, and the encodings of the
// scalar instructions (see ptolemy_pkg), are this design's choices.  An
// instruction takes two cycles (fetch, issue) when it does not stall.
module dispatcher
  import ptolemy_pkg::*;
#(
  parameter int unsigned CODE_DEPTH = 256,
  localparam int unsigned CAW       = $clog2(CODE_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               running,
  output logic               halted,
  input  logic               code_we,
  input  logic [CAW-1:0]     code_addr,
  input  logic [INSN_W-1:0]  code_wdata,
  output logic               acc_valid,
  output acc_cmd_t           acc_cmd,
  input  logic               acc_ready,
  output logic               pc_valid,
  output pc_cmd_t            pc_cmd,
  input  logic               pc_ready,
  input  logic               res_valid,
  input  logic [3:0]         res_rd,
  input  logic [REG_W-1:0]   res_data,
  output logic               csr_we,
  output logic [CSR_AW-1:0]  csr_addr,
  output logic [REG_W-1:0]   csr_wdata,
  output logic               unit_stall,
  output logic               dep_stall,
  input  logic [3:0]         dbg_raddr,
  output logic [REG_W-1:0]   dbg_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_HALTW, S_HALTED} state_e;
  state_e state;

  logic [INSN_W-1:0] code [CODE_DEPTH];
  logic [INSN_W-1:0] ir;
  logic [CAW-1:0]    pc;
  logic [REG_W-1:0]  regs [NREG];
  logic [NREG-1:0]   pend;
  logic              zflag;
  insn_t             d;

  always_ff @(posedge clk) begin
    if (code_we) code[code_addr] <= code_wdata;
    if (state == S_FETCH) ir <= code[pc];
  end

  assign d         = insn_t'(ir);
  assign dbg_rdata = regs[dbg_raddr];
  assign running   = (state != S_IDLE) && (state != S_HALTED);
  assign halted    = (state == S_HALTED);

  // register usage of the current instruction
  logic [NREG-1:0] use_mask;
  logic            to_acc, to_pc, writes_res;
  logic [3:0]      res_reg;
  always_comb begin
    use_mask   = '0;
    to_acc     = 1'b0;
    to_pc      = 1'b0;
    writes_res = 1'b0;
    res_reg    = '0;
    case (d.op)
      OP_INF:        begin to_acc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; use_mask[d.f3] = 1'b1; end
      OP_INFSP:      begin to_acc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; use_mask[d.f3] = 1'b1; use_mask[d.f4] = 1'b1; end
      OP_CSPS:       begin to_acc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; use_mask[d.f3] = 1'b1; end
      OP_SORT, OP_ACUM:
                     begin to_pc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; use_mask[d.f3] = 1'b1; end
      OP_GENMASKS:   begin to_pc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; end
      OP_FINDNEURON: begin to_pc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; use_mask[d.f3] = 1'b1;
                           writes_res = 1'b1; res_reg = d.f3; end
      OP_FINDRF:     begin to_pc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1;
                           writes_res = 1'b1; res_reg = d.f2; end
      OP_CLS:        begin to_pc = 1'b1; use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; use_mask[d.f3] = 1'b1;
                           writes_res = 1'b1; res_reg = d.f3; end
      OP_MOV, OP_DEC: use_mask[d.f1] = 1'b1;
      OP_MUL:        begin use_mask[d.f1] = 1'b1; use_mask[d.f2] = 1'b1; end
      OP_SETCSR:     use_mask[d.f3] = 1'b1;
      default: ;
    endcase
  end

  logic hazard, unit_busy, issue;
  always_comb begin
    hazard    = |(use_mask & pend);
    unit_busy = (to_acc && !acc_ready) || (to_pc && !pc_ready);
    issue     = (state == S_EXEC) && !hazard && !unit_busy;
    unit_stall = (state == S_EXEC) && !hazard && unit_busy;
    dep_stall  = (state == S_EXEC) && hazard;
  end

  always_comb begin
    acc_valid         = issue && to_acc;
    acc_cmd           = '0;
    acc_cmd.op        = d.op;
    acc_cmd.in_addr   = regs[d.f1];
    acc_cmd.w_addr    = regs[d.f2];
    acc_cmd.out_addr  = regs[d.f3];
    acc_cmd.psum_addr = (d.op == OP_CSPS) ? regs[d.f3] : regs[d.f4];
    acc_cmd.neuron_id = regs[d.f1];
    acc_cmd.layer_id  = regs[d.f2];
    pc_valid          = issue && to_pc;
    pc_cmd.op         = d.op;
    pc_cmd.a          = regs[d.f1];
    pc_cmd.b          = regs[d.f2];
    pc_cmd.c          = regs[d.f3];
    pc_cmd.rd         = res_reg;
    csr_we            = issue && d.op == OP_SETCSR;
    csr_addr          = {d.f1, d.f2};
    csr_wdata         = regs[d.f3];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      pend  <= '0;
      zflag <= 1'b0;
      for (int r = 0; r < NREG; r++) regs[r] <= '0;
    end else begin
      if (res_valid) begin
        regs[res_rd] <= res_data;
        pend[res_rd] <= 1'b0;
      end
      case (state)
        S_IDLE:  if (start) begin pc <= '0; state <= S_FETCH; end
        S_FETCH: state <= S_EXEC;
        S_EXEC: if (issue) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
          if (writes_res) pend[res_reg] <= 1'b1;
          case (d.op)
            OP_MOV: regs[d.f1] <= 32'({d.f2, d.f3, d.f4, d.f5});
            OP_DEC: begin
              regs[d.f1] <= regs[d.f1] - 1;
              zflag      <= (regs[d.f1] == 32'd1);
            end
            OP_JNE: if (!zflag) pc <= CAW'({d.f2, d.f3, d.f4, d.f5});
            OP_MUL: regs[d.f1] <= 32'((64'(signed'(regs[d.f1])) * 64'(signed'(regs[d.f2]))) >>> 16);
            OP_HALT: state <= S_HALTW;
            default: ;
          endcase
        end
        S_HALTW: if (acc_ready && pc_ready && pend == '0) state <= S_HALTED;
        S_HALTED: if (start) begin pc <= '0; state <= S_FETCH; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
