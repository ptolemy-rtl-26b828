// accum_unit: the accumulate step of cumulative-threshold extraction (acum).
//
// Given a sequence sorted by descending partial sum, it adds the values in
// order until the running sum reaches the target thr (= theta times the
// important output neuron's value, computed by software), and records the
// tags (offsets in the receptive field) of every element it added.  The
// element that makes the sum reach thr is included, so the result is the
// smallest set whose partial sums add up to at least thr, the definition of
// the important neurons.  If thr <= 0 nothing is selected; if the whole
// sequence does not reach thr, all of it is selected.
//
// Memory format (this design's choice): the result list is written at dst:
// dst holds the count, dst+1 .. dst+count the tags (low 32 bits of each word).
// Reads are issued one per cycle ahead of the decision; a value returned after
// the stop is ignored.  Timing: about len_used + 3 cycles.  start is accepted
// when idle; done pulses once.
module accum_unit
  import ptolemy_pkg::*;
#(
  parameter int unsigned AW = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [AW-1:0]      src,
  input  logic [31:0]        len,
  input  logic signed [31:0] thr,
  input  logic [AW-1:0]      dst,
  output logic               busy,
  output logic               done,
  output logic [31:0]        count,
  output logic               rd_en,
  output logic [AW-1:0]      rd_addr,
  input  logic [PC_W-1:0]    rd_data,
  output logic               wr_en,
  output logic [AW-1:0]      wr_addr,
  output logic [PC_W-1:0]    wr_data
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_CNT, S_DONE} state_e;
  state_e state;

  logic [AW-1:0]      src_q, dst_q;
  logic [31:0]        len_q, ridx;
  logic signed [31:0] thr_q;
  logic signed [63:0] cum;
  logic               pend, stop;
  entry_t             e;
  logic signed [63:0] cum_next;

  assign e        = entry_t'(rd_data);
  assign cum_next = cum + 64'(e.val);
  assign busy     = (state != S_IDLE);

  always_comb begin
    rd_en   = (state == S_RUN) && !stop && (ridx < len_q) && !(64'(thr_q) <= cum);
    rd_addr = src_q + AW'(ridx);
    wr_en   = 1'b0;
    wr_addr = '0;
    wr_data = '0;
    if (state == S_RUN && pend && !stop) begin
      wr_en   = 1'b1;
      wr_addr = dst_q + AW'(count) + 1'b1;
      wr_data = PC_W'(e.tag);
    end else if (state == S_CNT) begin
      wr_en   = 1'b1;
      wr_addr = dst_q;
      wr_data = PC_W'(count);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      src_q <= '0;
      dst_q <= '0;
      len_q <= '0;
      thr_q <= '0;
      ridx  <= '0;
      cum   <= '0;
      pend  <= 1'b0;
      stop  <= 1'b0;
      count <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          src_q <= src;
          dst_q <= dst;
          len_q <= len;
          thr_q <= thr;
          ridx  <= '0;
          cum   <= '0;
          pend  <= 1'b0;
          stop  <= 1'b0;
          count <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          pend <= rd_en;
          if (rd_en) ridx <= ridx + 1;
          if (pend && !stop) begin
            cum   <= cum_next;
            count <= count + 1;
            if (cum_next >= 64'(thr_q)) stop <= 1'b1;
          end
          // finished when the decision is made and no read is in flight
          if ((stop || (!rd_en && !pend)) && !(pend && !stop)) state <= S_CNT;
        end
        S_CNT:   state <= S_DONE;
        default: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

endmodule
