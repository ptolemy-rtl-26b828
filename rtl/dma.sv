// dma: block copier between DRAM and the on-chip SRAMs.
//
// The paper double-buffers partial sums and masks from the accelerator's SRAM
// to DRAM through a DMA and back into the path constructor's SRAM; this engine
// does those copies one word at a time: read a word from the source space,
// then write it to the destination space.  Spaces: DRAM (64-bit words, a
// valid/ready request channel with a separate response channel of any
// latency), the partial-sum buffer (32-bit words, read only: a word is
// sign-extended into the 64-bit destination, so a partial sum lands in the
// value field the sort engine reads) and the path-constructor SRAM (64-bit,
// read and write).  A transfer of len words takes about 3 cycles per word
// on-chip, plus the DRAM latency.  The word-serial engine and its command
// format are this design's choices; the paper only says that a DMA moves
// these data.  cmd is accepted when cmd_ready; done pulses once.
module dma
  import ptolemy_pkg::*;
#(
  parameter int unsigned PS_AW = 13,
  parameter int unsigned PC_AW = 13
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  dma_cmd_t         cmd,
  output logic             cmd_ready,
  output logic             done,
  output logic             dr_req_valid,
  output logic             dr_req_we,
  output logic [31:0]      dr_req_addr,
  output logic [PC_W-1:0]  dr_req_wdata,
  input  logic             dr_req_ready,
  input  logic             dr_rsp_valid,
  input  logic [PC_W-1:0]  dr_rsp_data,
  output logic             ps_rd_en,
  output logic [PS_AW-1:0] ps_rd_addr,
  input  logic [ACC_W-1:0] ps_rd_data,
  output logic             pc_en,
  output logic             pc_we,
  output logic [PC_AW-1:0] pc_addr,
  output logic [PC_W-1:0]  pc_wdata,
  input  logic [PC_W-1:0]  pc_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_RWAIT, S_WR, S_DONE} state_e;
  state_e state;

  dma_cmd_t        c_q;
  logic [31:0]     i;
  logic [PC_W-1:0] buf_q;

  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    dr_req_valid = 1'b0;
    dr_req_we    = 1'b0;
    dr_req_addr  = '0;
    dr_req_wdata = buf_q;
    ps_rd_en     = 1'b0;
    ps_rd_addr   = PS_AW'(c_q.src_addr + i);
    pc_en        = 1'b0;
    pc_we        = 1'b0;
    pc_addr      = '0;
    pc_wdata     = buf_q;
    if (state == S_RD) begin
      case (c_q.src_space)
        SP_DRAM: begin dr_req_valid = 1'b1; dr_req_addr = c_q.src_addr + i; end
        SP_PSUM: ps_rd_en = 1'b1;
        default: begin pc_en = 1'b1; pc_addr = PC_AW'(c_q.src_addr + i); end
      endcase
    end else if (state == S_WR) begin
      case (c_q.dst_space)
        SP_DRAM: begin dr_req_valid = 1'b1; dr_req_we = 1'b1; dr_req_addr = c_q.dst_addr + i; end
        default: begin pc_en = 1'b1; pc_we = 1'b1; pc_addr = PC_AW'(c_q.dst_addr + i); end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c_q   <= '0;
      i     <= '0;
      buf_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c_q   <= cmd;
          i     <= '0;
          state <= (cmd.len == 0) ? S_DONE : S_RD;
        end
        S_RD: begin
          if (c_q.src_space != SP_DRAM || dr_req_ready) state <= S_RWAIT;
        end
        S_RWAIT: begin
          case (c_q.src_space)
            SP_DRAM: if (dr_rsp_valid) begin buf_q <= dr_rsp_data; state <= S_WR; end
            SP_PSUM: begin buf_q <= PC_W'(signed'(ps_rd_data)); state <= S_WR; end
            default: begin buf_q <= pc_rdata; state <= S_WR; end
          endcase
        end
        S_WR: begin
          if (c_q.dst_space != SP_DRAM || dr_req_ready) begin
            i     <= i + 1;
            state <= (i + 1 == c_q.len) ? S_DONE : S_RD;
          end
        end
        default: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  a_dst_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd.dst_space != SP_PSUM));

endmodule
