// dnn_accel: the DNN accelerator extended for path extraction.  It runs the
// three inference instructions:
//
//   inf   : C = A x W on the DIM x DIM systolic array.  A is K activation
//           lines starting at in_addr (line k holds A[r][k] for every row r),
//           W is K weight lines starting at w_addr (line k holds W[k][c]).
//           C is requantised (>>> FRAC_W, saturated to 16 bits) and written as
//           DIM lines from out_addr (line r holds C[r][c]).
//   infsp : as inf, and every product each PE forms is also stored in the
//           partial-sum buffer: either the product itself (CSR mode = 0,
//           cumulative-threshold algorithms) or the single bit
//           "product > thd" (mode = 1, absolute thresholds).
//   csps  : re-computes all K partial sums of one output neuron (r,c) of an
//           earlier layer.  Only row 0 of the array is enabled; row 0 is fed
//           A[r][k], and PE(0,c)'s products are written to consecutive
//           words of the partial-sum buffer from psum_addr.
//
// Partial-sum layout (infsp).  After every array step s the products of all
// DIM*DIM PEs are written, PE(r,c) at entry s*DIM*DIM + r*DIM + c, so the
// partial sum A[r][k]*W[k][c] of output neuron (r,c) is at step s = k + r + c
// (entries outside a PE's k window are zero).  Products take 32-bit words and
// the buffer accepts 16 words per cycle, so each step stalls the array for
// ceil(DIM*DIM/16) cycles: the stall the paper attributes to storing partial
// sums.  Masks are packed 32 per word, ceil(DIM*DIM/32) words per step, and
// fit in one cycle.  Entries start at the infsp's first-partial-sum address
// and wrap around the buffer.  A step is also stalled when it would write
// into a half of the buffer that the DMA has not yet drained; at the end of an
// infsp the half holding its last entry is marked full.
//
// Layer table: every inf/infsp records its in_addr, w_addr and K under a
// layer number counted from 0 (CSR_LAYER_RST clears the count); csps looks
// its layer up there.  This table, the line layout, the Q8.8 format and the
// stall-and-drain capture are this design's choices: the paper fixes the
// instructions, the 20x20 16-bit array with 32-bit accumulators, the
// row-0-only re-computation and the partial-sum SRAM size.
//
// Interface: cmd_valid/cmd_ready handshake (cmd_ready is high only when
// idle), done pulses for one cycle at the end of a command.  The host port
// reaches the activation SRAM only while idle.  Timing of inf: about
// K + 2*DIM + 2 cycles plus DIM write-back cycles; infsp adds the drain.
module dnn_accel
  import ptolemy_pkg::*;
#(
  parameter int unsigned DIM       = 20,
  parameter int unsigned ACT_BYTES = 1572864,
  parameter int unsigned NLAYER    = 16,
  parameter int unsigned PS_NBANK  = 16,
  parameter int unsigned PS_BANKW  = 512,
  localparam int unsigned LINES    = ACT_BYTES / (DIM * DATA_W / 8),
  localparam int unsigned AAW      = $clog2(LINES),
  localparam int unsigned PAW      = $clog2(PS_NBANK * PS_BANKW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  input  acc_cmd_t                 cmd,
  output logic                     cmd_ready,
  output logic                     done,
  input  logic                     csr_we,
  input  logic [CSR_AW-1:0]        csr_addr,
  input  logic [REG_W-1:0]         csr_wdata,
  input  logic                     host_we,
  input  logic [AAW-1:0]           host_waddr,
  input  logic signed [DATA_W-1:0] host_wdata [DIM],
  input  logic                     host_re,
  input  logic [AAW-1:0]           host_raddr,
  output logic signed [DATA_W-1:0] host_rdata [DIM],
  input  logic                     ps_rd_en,
  input  logic [PAW-1:0]           ps_rd_addr,
  output logic [ACC_W-1:0]         ps_rd_data,
  input  logic [1:0]               ps_release,
  output logic [1:0]               ps_half_full,
  output logic                     drain_stall,   // array held while a step drains
  output logic                     full_stall     // array held on a full half
);

  localparam int unsigned NPE    = DIM * DIM;
  localparam int unsigned GPS    = (NPE + PS_NBANK - 1) / PS_NBANK;  // psum groups/step
  localparam int unsigned MWORDS = (NPE + 31) / 32;                  // mask words/step
  localparam int unsigned GW     = $clog2(GPS + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WB, S_DONE} state_e;
  state_e state;

  // ---------------- CSRs and layer table ----------------
  logic [REG_W-1:0]        csr_k;
  logic signed [ACC_W-1:0] csr_thd;
  logic                    csr_mode;
  logic [REG_W-1:0]        lt_in [NLAYER];
  logic [REG_W-1:0]        lt_w  [NLAYER];
  logic [REG_W-1:0]        lt_k  [NLAYER];
  logic [$clog2(NLAYER)-1:0] layer_cnt;

  // ---------------- command registers ----------------
  opcode_e            op_q;
  logic [AAW-1:0]     in_q, w_q, out_q;
  logic [REG_W-1:0]   k_q, t_q;
  logic [PAW-1:0]     psa_q, wptr;
  logic [$clog2(DIM)-1:0] rsel_q, csel_q;
  logic [$clog2(DIM+1)-1:0] wb_row;
  logic [GW-1:0]      grp;
  logic               feed_v;

  // ---------------- SRAM ----------------
  logic                     ra_en, rb_en, act_we;
  logic [AAW-1:0]           ra_addr, rb_addr, act_waddr;
  logic signed [DATA_W-1:0] qa [DIM];
  logic signed [DATA_W-1:0] qb [DIM];
  logic signed [DATA_W-1:0] act_wdata [DIM];

  act_sram #(.DIM(DIM), .BYTES(ACT_BYTES)) u_act (
    .clk(clk), .ra_en(ra_en), .ra_addr(ra_addr), .ra_data(qa),
    .rb_en(rb_en), .rb_addr(rb_addr), .rb_data(qb),
    .we(act_we), .waddr(act_waddr), .wdata(act_wdata));

  assign host_rdata = qa;

  // ---------------- PE array ----------------
  logic                     adv, clr;
  logic [DIM-1:0]           row_en;
  logic signed [DATA_W-1:0] a_line [DIM];
  logic signed [DATA_W-1:0] w_line [DIM];
  logic signed [ACC_W-1:0]  psum     [DIM][DIM];
  logic signed [ACC_W-1:0]  sram_out [DIM][DIM];
  logic                     sram_v   [DIM][DIM];
  logic                     is_csps, is_store;

  assign is_csps  = (op_q == OP_CSPS);
  assign is_store = (op_q == OP_INFSP);

  pe_array #(.DIM(DIM)) u_array (
    .clk(clk), .rst_n(rst_n), .en(adv), .clr(clr), .row_en(row_en),
    .mode(csr_mode && !is_csps), .thd(csr_thd),
    .a_line(a_line), .a_valid(feed_v), .w_line(w_line),
    .psum(psum), .sram_out(sram_out), .sram_valid(sram_v));

  always_comb begin
    for (int i = 0; i < DIM; i++) begin
      w_line[i] = feed_v ? qb[i] : '0;
      if (is_csps) a_line[i] = (i == 0 && feed_v) ? qa[rsel_q] : '0;
      else         a_line[i] = feed_v ? qa[i] : '0;
    end
    row_en = is_csps ? DIM'(1) : '1;
  end

  // ---------------- partial-sum capture ----------------
  logic             any_v;
  logic [NPE-1:0]   maskbits;
  logic             ps_wr_valid, ps_wr_track, ps_stall;
  logic [PAW-1:0]   ps_wr_addr;
  logic [PS_NBANK-1:0] ps_wr_mask;
  logic [ACC_W-1:0] ps_wr_data [PS_NBANK];
  logic             last_grp;

  always_comb begin
    any_v = 1'b0;
    for (int r = 0; r < DIM; r++)
      for (int c = 0; c < DIM; c++) begin
        any_v = any_v | sram_v[r][c];
        maskbits[r*DIM + c] = sram_v[r][c] & sram_out[r][c][0];
      end
  end

  always_comb begin
    ps_wr_valid = 1'b0;
    ps_wr_track = 1'b0;
    ps_wr_addr  = wptr;
    ps_wr_mask  = '0;
    for (int b = 0; b < PS_NBANK; b++) ps_wr_data[b] = '0;
    last_grp    = 1'b1;
    if (state == S_RUN && is_csps) begin
      if (sram_v[0][csel_q]) begin
        ps_wr_valid   = 1'b1;
        ps_wr_addr    = psa_q + PAW'(t_q - 32'(csel_q) - 32'd2);
        ps_wr_mask[0] = 1'b1;
        ps_wr_data[0] = sram_out[0][csel_q];
      end
    end else if (state == S_RUN && is_store && any_v) begin
      ps_wr_valid = 1'b1;
      ps_wr_track = 1'b1;
      if (csr_mode) begin
        for (int b = 0; b < PS_NBANK; b++)
          if (b < MWORDS) begin
            ps_wr_mask[b] = 1'b1;
            for (int j = 0; j < 32; j++)
              if (b*32 + j < NPE) ps_wr_data[b][j] = maskbits[b*32 + j];
          end
      end else begin
        last_grp = (32'(grp) == GPS - 1);
        // group g carries PEs g*PS_NBANK .. g*PS_NBANK+PS_NBANK-1 (row-major)
        for (int g = 0; g < GPS; g++)
          if (32'(grp) == g)
            for (int b = 0; b < PS_NBANK; b++)
              if (g * PS_NBANK + b < NPE) begin
                ps_wr_mask[b] = 1'b1;
                ps_wr_data[b] = sram_out[(g*PS_NBANK + b) / DIM][(g*PS_NBANK + b) % DIM];
              end
      end
    end
  end

  psum_buffer #(.NBANK(PS_NBANK), .BANK_WORDS(PS_BANKW)) u_psum (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(ps_wr_valid), .wr_track(ps_wr_track),
    .wr_addr(ps_wr_addr), .wr_mask(ps_wr_mask), .wr_data(ps_wr_data), .wr_stall(ps_stall),
    .flush(state == S_DONE && is_store), .release_half(ps_release), .half_full(ps_half_full),
    .rd_en(ps_rd_en), .rd_addr(ps_rd_addr), .rd_data(ps_rd_data));

  // array advances unless a capture group is pending
  always_comb begin
    adv = 1'b0;
    if (state == S_RUN) begin
      if (ps_wr_valid && ps_wr_track) adv = last_grp && !ps_stall;
      else                            adv = 1'b1;
    end
  end
  assign drain_stall = (state == S_RUN) && ps_wr_valid && ps_wr_track && !last_grp && !ps_stall;
  assign full_stall  = (state == S_RUN) && ps_stall;

  // SRAM read requests: line t_q is read on the advancing cycle t_q
  always_comb begin
    ra_en   = 1'b0;
    rb_en   = 1'b0;
    ra_addr = host_raddr;
    rb_addr = '0;
    if (state == S_RUN) begin
      ra_en   = adv && (t_q < k_q);
      rb_en   = adv && (t_q < k_q);
      ra_addr = in_q + AAW'(t_q);
      rb_addr = w_q + AAW'(t_q);
    end else if (state == S_IDLE) begin
      ra_en   = host_re;
    end
  end

  // write-back of requantised outputs, or host writes while idle
  function automatic logic signed [DATA_W-1:0] requant(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> FRAC_W;
    if (s > 32'sd32767)       return 16'sh7fff;
    else if (s < -32'sd32768) return 16'sh8000;
    else                      return s[DATA_W-1:0];
  endfunction

  always_comb begin
    act_we    = 1'b0;
    act_waddr = host_waddr;
    for (int i = 0; i < DIM; i++) act_wdata[i] = host_wdata[i];
    if (state == S_WB) begin
      act_we    = 1'b1;
      act_waddr = out_q + AAW'(wb_row);
      for (int i = 0; i < DIM; i++)
        act_wdata[i] = requant(psum[($clog2(DIM))'(wb_row)][i]);
    end else if (state == S_IDLE) begin
      act_we = host_we;
    end
  end

  assign cmd_ready = (state == S_IDLE);
  assign clr       = (state == S_IDLE) && cmd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      csr_k     <= 32'd1;
      csr_thd   <= '0;
      csr_mode  <= 1'b0;
      layer_cnt <= '0;
      op_q      <= OP_INF;
      in_q      <= '0;
      w_q       <= '0;
      out_q     <= '0;
      k_q       <= '0;
      t_q       <= '0;
      psa_q     <= '0;
      wptr      <= '0;
      rsel_q    <= '0;
      csel_q    <= '0;
      wb_row    <= '0;
      grp       <= '0;
      feed_v    <= 1'b0;
      done      <= 1'b0;
      for (int l = 0; l < NLAYER; l++) begin
        lt_in[l] <= '0;
        lt_w[l]  <= '0;
        lt_k[l]  <= '0;
      end
    end else begin
      done <= 1'b0;
      if (csr_we) begin
        case (csr_addr)
          CSR_K:         csr_k    <= csr_wdata;
          CSR_THD:       csr_thd  <= csr_wdata;
          CSR_MODE:      csr_mode <= csr_wdata[0];
          CSR_LAYER_RST: layer_cnt <= '0;
          default: ;
        endcase
      end
      case (state)
        S_IDLE: if (cmd_valid) begin
          op_q   <= cmd.op;
          t_q    <= '0;
          grp    <= '0;
          feed_v <= 1'b0;
          wb_row <= '0;
          if (cmd.op == OP_CSPS) begin
            in_q   <= AAW'(lt_in[cmd.layer_id[$clog2(NLAYER)-1:0]]);
            w_q    <= AAW'(lt_w[cmd.layer_id[$clog2(NLAYER)-1:0]]);
            k_q    <= lt_k[cmd.layer_id[$clog2(NLAYER)-1:0]];
            psa_q  <= PAW'(cmd.psum_addr);
            rsel_q <= ($clog2(DIM))'(cmd.neuron_id / DIM);
            csel_q <= ($clog2(DIM))'(cmd.neuron_id % DIM);
          end else begin
            in_q  <= AAW'(cmd.in_addr);
            if (cmd.op == OP_INFSP) wptr <= PAW'(cmd.psum_addr);
            w_q   <= AAW'(cmd.w_addr);
            out_q <= AAW'(cmd.out_addr);
            k_q   <= csr_k;
            lt_in[layer_cnt] <= cmd.in_addr;
            lt_w[layer_cnt]  <= cmd.w_addr;
            lt_k[layer_cnt]  <= csr_k;
            layer_cnt <= layer_cnt + 1'b1;
          end
          state <= S_RUN;
        end
        S_RUN: begin
          if (ps_wr_valid && ps_wr_track && !ps_stall) begin
            wptr <= wptr + PAW'(csr_mode ? MWORDS : ((32'(grp) == GPS - 1) ? NPE - (GPS-1)*PS_NBANK : PS_NBANK));
            grp  <= last_grp ? '0 : grp + 1'b1;
          end
          if (adv) begin
            feed_v <= (t_q < k_q);
            t_q    <= t_q + 1;
            if (t_q == k_q + 2*DIM - 1)
              state <= is_csps ? S_DONE : S_WB;
          end
        end
        S_WB: begin
          wb_row <= wb_row + 1'b1;
          if (32'(wb_row) == DIM - 1) state <= S_DONE;
        end
        default: begin  // S_DONE
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  a_cmd_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd.op inside {OP_INF, OP_INFSP, OP_CSPS}));

endmodule
