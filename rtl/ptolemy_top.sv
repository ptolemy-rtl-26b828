// ptolemy_top: the whole detection engine: an instruction dispatcher, the DNN
// accelerator extended to capture partial sums or threshold masks, the path
// constructor (sort & merge, accumulate, mask generation, address and
// similarity units with their own SRAM) and a DMA between them and DRAM.
//
// Data flow for one input: the program runs the network layer by layer on the
// accelerator (inf / infsp); partial sums or masks land in the partial-sum
// buffer, or are re-computed later for important neurons only (csps); the DMA
// carries them to DRAM and into the path constructor's SRAM; the path
// constructor sorts each receptive field, accumulates it to the cumulative
// threshold, sets the important neurons' bits in the activation path, and
// finally compares the path with the canary class path (cls).  The similarity
// S leaves on cls_* for the random-forest classifier, which runs in software
// outside this design, as does the micro-controller that loads programs,
// starts DMA transfers and releases drained partial-sum halves.  DRAM is
// outside too: its request/response channel is brought out on dr_*.
// Default parameters are the published configuration: a 20x20 array, 1.5 MB
// accelerator SRAM, 32 KB partial-sum SRAM in 2 KB banks, 64 KB path SRAM,
// two 16-element sort units and a 16-way merge tree.
module ptolemy_top
  import ptolemy_pkg::*;
#(
  parameter int unsigned DIM        = 20,
  parameter int unsigned ACT_BYTES  = 1572864,
  parameter int unsigned PS_NBANK   = 16,
  parameter int unsigned PS_BANKW   = 512,
  parameter int unsigned PC_BYTES   = 65536,
  parameter int unsigned NSORT      = 16,
  parameter int unsigned NWAY       = 16,
  parameter int unsigned NLAYER     = 16,
  parameter int unsigned CODE_DEPTH = 256,
  localparam int unsigned AAW       = $clog2(ACT_BYTES / (DIM * DATA_W / 8)),
  localparam int unsigned PAW       = $clog2(PS_NBANK * PS_BANKW),
  localparam int unsigned CAW       = $clog2(CODE_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // program control (micro-controller side)
  input  logic                     start,
  output logic                     running,
  output logic                     halted,
  input  logic                     code_we,
  input  logic [CAW-1:0]           code_addr,
  input  logic [INSN_W-1:0]        code_wdata,
  input  logic [3:0]               dbg_raddr,
  output logic [REG_W-1:0]         dbg_rdata,
  // accelerator SRAM fill / read-back (weights and feature maps)
  input  logic                     host_we,
  input  logic [AAW-1:0]           host_waddr,
  input  logic signed [DATA_W-1:0] host_wdata [DIM],
  input  logic                     host_re,
  input  logic [AAW-1:0]           host_raddr,
  output logic signed [DATA_W-1:0] host_rdata [DIM],
  // DMA commands and partial-sum double-buffer control
  input  logic                     dma_valid,
  input  dma_cmd_t                 dma_cmd,
  output logic                     dma_ready,
  output logic                     dma_done,
  output logic [1:0]               ps_half_full,
  input  logic [1:0]               ps_release,
  // DRAM channel
  output logic                     dr_req_valid,
  output logic                     dr_req_we,
  output logic [31:0]              dr_req_addr,
  output logic [PC_W-1:0]          dr_req_wdata,
  input  logic                     dr_req_ready,
  input  logic                     dr_rsp_valid,
  input  logic [PC_W-1:0]          dr_rsp_data,
  // to the classifier
  output logic                     cls_valid,
  output logic [31:0]              cls_and_cnt,
  output logic [31:0]              cls_path_cnt,
  output logic [31:0]              cls_sim,
  // activity, for performance counting
  output logic                     acc_done,
  output logic                     pc_done,
  output logic                     acc_busy,
  output logic                     pc_busy,
  output logic                     unit_stall,
  output logic                     dep_stall,
  output logic                     drain_stall,
  output logic                     full_stall
);

  localparam int unsigned PCAW = $clog2(PC_BYTES / (PC_W / 8));

  logic             acc_valid, acc_ready, pcu_valid, pcu_ready;
  acc_cmd_t         acc_cmd;
  pc_cmd_t          pcu_cmd;
  logic             res_valid;
  logic [3:0]       res_rd;
  logic [REG_W-1:0] res_data;
  logic             csr_we;
  logic [CSR_AW-1:0] csr_addr;
  logic [REG_W-1:0] csr_wdata;

  dispatcher #(.CODE_DEPTH(CODE_DEPTH)) u_disp (
    .clk(clk), .rst_n(rst_n), .start(start), .running(running), .halted(halted),
    .code_we(code_we), .code_addr(code_addr), .code_wdata(code_wdata),
    .acc_valid(acc_valid), .acc_cmd(acc_cmd), .acc_ready(acc_ready),
    .pc_valid(pcu_valid), .pc_cmd(pcu_cmd), .pc_ready(pcu_ready),
    .res_valid(res_valid), .res_rd(res_rd), .res_data(res_data),
    .csr_we(csr_we), .csr_addr(csr_addr), .csr_wdata(csr_wdata),
    .unit_stall(unit_stall), .dep_stall(dep_stall),
    .dbg_raddr(dbg_raddr), .dbg_rdata(dbg_rdata));

  logic             ps_rd_en;
  logic [PAW-1:0]   ps_rd_addr;
  logic [ACC_W-1:0] ps_rd_data;

  dnn_accel #(.DIM(DIM), .ACT_BYTES(ACT_BYTES), .NLAYER(NLAYER),
              .PS_NBANK(PS_NBANK), .PS_BANKW(PS_BANKW)) u_acc (
    .clk(clk), .rst_n(rst_n), .cmd_valid(acc_valid), .cmd(acc_cmd), .cmd_ready(acc_ready),
    .done(acc_done), .csr_we(csr_we), .csr_addr(csr_addr), .csr_wdata(csr_wdata),
    .host_we(host_we), .host_waddr(host_waddr), .host_wdata(host_wdata),
    .host_re(host_re), .host_raddr(host_raddr), .host_rdata(host_rdata),
    .ps_rd_en(ps_rd_en), .ps_rd_addr(ps_rd_addr), .ps_rd_data(ps_rd_data),
    .ps_release(ps_release), .ps_half_full(ps_half_full),
    .drain_stall(drain_stall), .full_stall(full_stall));

  logic             x_en, x_we;
  logic [PCAW-1:0]  x_addr;
  logic [PC_W-1:0]  x_wdata, x_rdata;

  path_ctor #(.PC_BYTES(PC_BYTES), .NSORT(NSORT), .NWAY(NWAY), .NLAYER(NLAYER)) u_pc (
    .clk(clk), .rst_n(rst_n), .cmd_valid(pcu_valid), .cmd(pcu_cmd), .cmd_ready(pcu_ready),
    .res_valid(res_valid), .res_rd(res_rd), .res_data(res_data), .op_done(pc_done),
    .csr_we(csr_we), .csr_addr(csr_addr), .csr_wdata(csr_wdata),
    .x_en(x_en), .x_we(x_we), .x_addr(x_addr), .x_wdata(x_wdata), .x_rdata(x_rdata),
    .cls_valid(cls_valid), .cls_and_cnt(cls_and_cnt), .cls_path_cnt(cls_path_cnt),
    .cls_sim(cls_sim));

  dma #(.PS_AW(PAW), .PC_AW(PCAW)) u_dma (
    .clk(clk), .rst_n(rst_n), .cmd_valid(dma_valid), .cmd(dma_cmd), .cmd_ready(dma_ready),
    .done(dma_done),
    .dr_req_valid(dr_req_valid), .dr_req_we(dr_req_we), .dr_req_addr(dr_req_addr),
    .dr_req_wdata(dr_req_wdata), .dr_req_ready(dr_req_ready),
    .dr_rsp_valid(dr_rsp_valid), .dr_rsp_data(dr_rsp_data),
    .ps_rd_en(ps_rd_en), .ps_rd_addr(ps_rd_addr), .ps_rd_data(ps_rd_data),
    .pc_en(x_en), .pc_we(x_we), .pc_addr(x_addr), .pc_wdata(x_wdata), .pc_rdata(x_rdata));

  assign acc_busy = !acc_ready;
  assign pc_busy  = !pcu_ready;

endmodule
