// path_ctor: the path constructor.  It executes the path-construction and
// classification instructions on data in its own SRAM:
//
//   sort       a = unsorted start, b = length, c = sorted start  (sort_engine)
//   acum       a = sorted start,  b = list address, c = threshold (accum_unit)
//   genmasks   a = list address,  b = path bit-vector base        (mask_gen)
//   findneuron a = layer, b = position          -> register rd    (addr_unit)
//   findrf     a = neuron address               -> register rd    (addr_unit)
//   cls        a = class path,    b = activation path -> rd = S   (similarity_unit)
//
// acum uses the length of the most recent sort, and cls the path length set
// in CSR_PATH_WORDS: neither is an operand of the published encoding, so
// this design keeps them in the unit.  One instruction runs at a time
// (cmd_ready is high only when idle); this serialises sort and acum of
// different neurons, which the paper's compiler overlaps.  The units share
// the SRAM's read and write ports through a multiplexer steered by the
// running instruction; the third port belongs to the DMA.  Results for a
// register come back on res_valid/res_rd/res_data; cls also presents both
// popcounts and S to the off-chip classifier with cls_valid.
module path_ctor
  import ptolemy_pkg::*;
#(
  parameter int unsigned PC_BYTES = 65536,
  parameter int unsigned NSORT    = 16,
  parameter int unsigned NWAY     = 16,
  parameter int unsigned NLAYER   = 16,
  localparam int unsigned AW      = $clog2(PC_BYTES / (PC_W / 8))
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  pc_cmd_t          cmd,
  output logic             cmd_ready,
  output logic             res_valid,
  output logic [3:0]       res_rd,
  output logic [REG_W-1:0] res_data,
  output logic             op_done,
  input  logic             csr_we,
  input  logic [CSR_AW-1:0] csr_addr,
  input  logic [REG_W-1:0] csr_wdata,
  input  logic             x_en,
  input  logic             x_we,
  input  logic [AW-1:0]    x_addr,
  input  logic [PC_W-1:0]  x_wdata,
  output logic [PC_W-1:0]  x_rdata,
  output logic             cls_valid,
  output logic [31:0]      cls_and_cnt,
  output logic [31:0]      cls_path_cnt,
  output logic [31:0]      cls_sim
);

  typedef enum logic [2:0] {U_NONE, U_SORT, U_ACUM, U_MASK, U_ADDR, U_CLS} unit_e;
  unit_e act;

  logic [31:0]     last_len, path_words;
  logic [3:0]      rd_q;

  logic            rd_en, wr_en;
  logic [AW-1:0]   rd_addr, wr_addr;
  logic [PC_W-1:0] rd_data, wr_data;

  pc_sram #(.BYTES(PC_BYTES)) u_sram (
    .clk(clk), .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .x_en(x_en), .x_we(x_we), .x_addr(x_addr), .x_wdata(x_wdata), .x_rdata(x_rdata));

  logic go;
  assign go        = cmd_valid && cmd_ready;
  assign cmd_ready = (act == U_NONE);

  // ---- sort ----
  logic s_busy, s_done, s_rd, s_wr;
  logic [AW-1:0] s_ra, s_wa;
  logic [PC_W-1:0] s_wd;
  sort_engine #(.AW(AW), .NSORT(NSORT), .NWAY(NWAY)) u_sort (
    .clk(clk), .rst_n(rst_n), .start(go && cmd.op == OP_SORT),
    .src(AW'(cmd.a)), .len(cmd.b), .dst(AW'(cmd.c)), .busy(s_busy), .done(s_done),
    .rd_en(s_rd), .rd_addr(s_ra), .rd_data(rd_data),
    .wr_en(s_wr), .wr_addr(s_wa), .wr_data(s_wd));

  // ---- accumulate ----
  logic a_busy, a_done, a_rd, a_wr;
  logic [AW-1:0] a_ra, a_wa;
  logic [PC_W-1:0] a_wd;
  accum_unit #(.AW(AW)) u_acum (
    .clk(clk), .rst_n(rst_n), .start(go && cmd.op == OP_ACUM),
    .src(AW'(cmd.a)), .len(last_len), .thr(cmd.c), .dst(AW'(cmd.b)),
    .busy(a_busy), .done(a_done), .count(),
    .rd_en(a_rd), .rd_addr(a_ra), .rd_data(rd_data),
    .wr_en(a_wr), .wr_addr(a_wa), .wr_data(a_wd));

  // ---- mask generation ----
  logic m_busy, m_done, m_rd, m_wr;
  logic [AW-1:0] m_ra, m_wa;
  logic [PC_W-1:0] m_wd;
  mask_gen #(.AW(AW)) u_mask (
    .clk(clk), .rst_n(rst_n), .start(go && cmd.op == OP_GENMASKS),
    .src(AW'(cmd.a)), .dst(AW'(cmd.b)), .busy(m_busy), .done(m_done),
    .rd_en(m_rd), .rd_addr(m_ra), .rd_data(rd_data),
    .wr_en(m_wr), .wr_addr(m_wa), .wr_data(m_wd));

  // ---- address unit ----
  logic ad_valid;
  logic [REG_W-1:0] ad_resp;
  addr_unit #(.NLAYER(NLAYER)) u_addr (
    .clk(clk), .rst_n(rst_n), .csr_we(csr_we), .csr_addr(csr_addr), .csr_wdata(csr_wdata),
    .req_valid(go && (cmd.op == OP_FINDNEURON || cmd.op == OP_FINDRF)),
    .req_op(cmd.op), .a(cmd.a), .b(cmd.b), .resp_valid(ad_valid), .resp(ad_resp));

  // ---- similarity ----
  logic c_busy, c_done, c_rd;
  logic [AW-1:0] c_ra;
  similarity_unit #(.AW(AW)) u_cls (
    .clk(clk), .rst_n(rst_n), .start(go && cmd.op == OP_CLS),
    .cp_addr(AW'(cmd.a)), .ap_addr(AW'(cmd.b)), .nwords(path_words),
    .busy(c_busy), .done(c_done), .and_cnt(cls_and_cnt), .path_cnt(cls_path_cnt),
    .sim(cls_sim), .rd_en(c_rd), .rd_addr(c_ra), .rd_data(rd_data));

  always_comb begin
    rd_en = 1'b0; rd_addr = '0; wr_en = 1'b0; wr_addr = '0; wr_data = '0;
    case (act)
      U_SORT: begin rd_en = s_rd; rd_addr = s_ra; wr_en = s_wr; wr_addr = s_wa; wr_data = s_wd; end
      U_ACUM: begin rd_en = a_rd; rd_addr = a_ra; wr_en = a_wr; wr_addr = a_wa; wr_data = a_wd; end
      U_MASK: begin rd_en = m_rd; rd_addr = m_ra; wr_en = m_wr; wr_addr = m_wa; wr_data = m_wd; end
      U_CLS:  begin rd_en = c_rd; rd_addr = c_ra; end
      default: ;
    endcase
  end

  logic unit_done;
  assign unit_done = (act == U_SORT && s_done) || (act == U_ACUM && a_done) ||
                     (act == U_MASK && m_done) || (act == U_ADDR && ad_valid) ||
                     (act == U_CLS && c_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act        <= U_NONE;
      last_len   <= '0;
      path_words <= 32'd1;
      rd_q       <= '0;
      res_valid  <= 1'b0;
      res_rd     <= '0;
      res_data   <= '0;
      op_done    <= 1'b0;
      cls_valid  <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      op_done   <= 1'b0;
      cls_valid <= 1'b0;
      if (csr_we && csr_addr == CSR_PATH_WORDS) path_words <= csr_wdata;
      if (go) begin
        rd_q <= cmd.rd;
        case (cmd.op)
          OP_SORT:     begin act <= U_SORT; last_len <= cmd.b; end
          OP_ACUM:     act <= U_ACUM;
          OP_GENMASKS: act <= U_MASK;
          OP_FINDNEURON, OP_FINDRF: act <= U_ADDR;
          OP_CLS:      act <= U_CLS;
          default:     act <= U_NONE;
        endcase
      end
      if (unit_done) begin
        act     <= U_NONE;
        op_done <= 1'b1;
        if (act == U_ADDR) begin
          res_valid <= 1'b1;
          res_rd    <= rd_q;
          res_data  <= ad_resp;
        end
        if (act == U_CLS) begin
          res_valid <= 1'b1;
          res_rd    <= rd_q;
          res_data  <= cls_sim;
          cls_valid <= 1'b1;
        end
      end
    end
  end

  a_cmd_legal: assert property (@(posedge clk) disable iff (!rst_n)
    go |-> (cmd.op inside {OP_SORT, OP_ACUM, OP_GENMASKS, OP_FINDNEURON, OP_FINDRF, OP_CLS}));

  // The busy flags are only observed by assertions: a unit never runs
  // while another owns the SRAM ports.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({s_busy, a_busy, m_busy, c_busy}));

endmodule
