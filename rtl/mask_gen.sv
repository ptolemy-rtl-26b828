// mask_gen: mask generation for the activation path (genmasks).
//
// The activation path is a bit vector with one bit per neuron; a 1 marks an
// important neuron.  mask_gen reads a list of important-neuron tags (the
// format written by accum_unit: count at src, tags at src+1 .. src+count) and
// sets bit tag of the bit vector that starts at dst, PC_W bits per SRAM word:
// word dst + tag / PC_W, bit tag % PC_W.  Setting is an OR, so lists from
// several receptive fields and layers accumulate into one path; clearing a
// path before use is up to software.  The read-modify-write takes three
// cycles per tag (read tag, read word, write word).  The paper gives only the
// function ("lightweight mask generation hardware"); the list format and
// the bit layout are this design's choices.  start when idle; done pulses once.
module mask_gen
  import ptolemy_pkg::*;
#(
  parameter int unsigned AW = 13
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [AW-1:0]   src,
  input  logic [AW-1:0]   dst,
  output logic            busy,
  output logic            done,
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  input  logic [PC_W-1:0] rd_data,
  output logic            wr_en,
  output logic [AW-1:0]   wr_addr,
  output logic [PC_W-1:0] wr_data
);

  localparam int unsigned BW = $clog2(PC_W);

  typedef enum logic [2:0] {S_IDLE, S_RCNT, S_WCNT, S_RTAG, S_RWORD, S_WRITE, S_DONE} state_e;
  state_e state;

  logic [AW-1:0] src_q, dst_q;
  logic [31:0]   n, i, tag;

  assign busy = (state != S_IDLE);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    wr_en   = 1'b0;
    wr_addr = dst_q + AW'(tag >> BW);
    wr_data = rd_data | (PC_W'(1) << tag[BW-1:0]);
    case (state)
      S_RCNT:  begin rd_en = 1'b1; rd_addr = src_q; end
      S_RTAG:  begin rd_en = (i < n); rd_addr = src_q + AW'(i) + 1'b1; end
      S_RWORD: begin rd_en = 1'b1; rd_addr = dst_q + AW'(rd_data[31:0] >> BW); end
      S_WRITE: wr_en = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      src_q <= '0;
      dst_q <= '0;
      n     <= '0;
      i     <= '0;
      tag   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          src_q <= src;
          dst_q <= dst;
          i     <= '0;
          state <= S_RCNT;
        end
        S_RCNT:  state <= S_WCNT;
        S_WCNT:  begin n <= rd_data[31:0]; state <= S_RTAG; end
        S_RTAG:  state <= (i < n) ? S_RWORD : S_DONE;
        S_RWORD: begin tag <= rd_data[31:0]; state <= S_WRITE; end
        S_WRITE: begin i <= i + 1; state <= S_RTAG; end
        default: begin done <= 1'b1; state <= S_IDLE; end
      endcase
    end
  end

endmodule
