// similarity_unit: path similarity for classification (cls).
//
// S = |P & Pc| / |P|, where P is the input's activation path, Pc the canary
// class path of the predicted class and |.| counts ones.  The unit reads the
// two bit vectors word by word (PC_W bits per word, so 64 path bits are
// compared per word pair), accumulates popcount(P & Pc) and popcount(P), and
// then divides with a restoring divider to give S in unsigned Q16.16
// (S = 1.0 is 32'h0001_0000).  |P| = 0 gives S = 0.  S is what the
// off-chip random-forest classifier consumes; the two counts are also
// provided.  The formula is published; the word width, alternating reads
// (two cycles per word pair over the single read port) and the serial divider
// (48 cycles) are this design's choices.  start when idle; done pulses once
// with the results held until the next start.
module similarity_unit
  import ptolemy_pkg::*;
#(
  parameter int unsigned AW = 13
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [AW-1:0]   cp_addr,     // class path
  input  logic [AW-1:0]   ap_addr,     // activation path
  input  logic [31:0]     nwords,
  output logic            busy,
  output logic            done,
  output logic [31:0]     and_cnt,
  output logic [31:0]     path_cnt,
  output logic [31:0]     sim,         // Q16.16
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  input  logic [PC_W-1:0] rd_data
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_DIV, S_DONE} state_e;
  state_e state;

  logic [AW-1:0]   cp_q, ap_q;
  logic [31:0]     n_q, idx;
  logic            phase;       // 0: class word requested, 1: path word requested
  logic            pend;
  logic            pend_phase;
  logic [PC_W-1:0] cword;
  logic [5:0]      dstep;
  logic [31:0]     rem;          // always below path_cnt
  logic [31:0]     quo;          // S <= 1.0 fits in 32 bits
  logic [47:0]     dividend;

  assign dividend = {and_cnt[31:0], 16'b0};

  assign busy = (state != S_IDLE);

  always_comb begin
    rd_en   = (state == S_RD) && (idx < n_q);
    rd_addr = phase ? ap_q + AW'(idx) : cp_q + AW'(idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cp_q       <= '0;
      ap_q       <= '0;
      n_q        <= '0;
      idx        <= '0;
      phase      <= 1'b0;
      pend       <= 1'b0;
      pend_phase <= 1'b0;
      cword      <= '0;
      and_cnt    <= '0;
      path_cnt   <= '0;
      sim        <= '0;
      dstep      <= '0;
      rem        <= '0;
      quo        <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cp_q     <= cp_addr;
          ap_q     <= ap_addr;
          n_q      <= nwords;
          idx      <= '0;
          phase    <= 1'b0;
          pend     <= 1'b0;
          and_cnt  <= '0;
          path_cnt <= '0;
          state    <= S_RD;
        end
        S_RD: begin
          pend       <= rd_en;
          pend_phase <= phase;
          if (rd_en) begin
            phase <= ~phase;
            if (phase) idx <= idx + 1;
          end
          if (pend) begin
            if (!pend_phase) cword <= rd_data;
            else begin
              and_cnt  <= and_cnt + 32'($countones(rd_data & cword));
              path_cnt <= path_cnt + 32'($countones(rd_data));
            end
          end
          if (!rd_en && !pend) begin
            rem   <= '0;
            quo   <= '0;
            dstep <= '0;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          // restoring division of (and_cnt << 16) by path_cnt, one bit per cycle
          if (dstep < 48) begin
            if (path_cnt != 0 && {rem, dividend[47 - dstep]} >= 33'(path_cnt)) begin
              rem <= 32'({rem, dividend[47 - dstep]} - 33'(path_cnt));
              quo <= {quo[30:0], 1'b1};
            end else begin
              rem <= {rem[30:0], dividend[47 - dstep]};
              quo <= {quo[30:0], 1'b0};
            end
            dstep <= dstep + 1'b1;
          end else begin
            sim   <= (path_cnt == 0) ? '0 : quo;
            state <= S_DONE;
          end
        end
        default: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

endmodule
