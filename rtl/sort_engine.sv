// sort_engine: the "sort & merge" part of the path constructor.  It sorts a
// sequence of partial sums by descending value so that the accumulate unit can
// pick the fewest, largest contributions.
//
// sort(src, len, dst) works in two phases over the path-constructor SRAM:
//  1. Run formation.  Elements are read one per cycle from src (value in the
//     low 32 bits of each word) and tagged with their offset in the sequence.
//     Every NSORT of them go to one of the two sort units, alternately, so
//     that one unit's result is written back while the next group is read and
//     the other unit sorts: reading and writing each proceed at one word per
//     cycle, which makes this phase memory-bound, as the paper observes.
//  2. Merge passes.  Groups of up to NWAY runs of length R are merged by the
//     merge tree into runs of length NWAY*R, until one run remains.
// Passes ping-pong between dst and dst+len; phase 1 starts in whichever
// region makes the last pass end in dst, so dst must have room for 2*len
// words.  The result at dst is the sequence in descending order, each word
// holding {tag, value}.
//
// Published: sequences are split into sub-sequences sorted in parallel by
// sorting networks and then merged by a merge tree; two 16-element sort units
// and one 16-way merge tree.  This design's own choices: the SRAM layout, the
// ping-pong regions and one merged element every two cycles (read, then
// refill the winning leaf).  Memory port: one synchronous read (1-cycle
// latency) and one write per cycle.  start is accepted in IDLE; done pulses
// once when the sorted sequence is complete.
module sort_engine
  import ptolemy_pkg::*;
#(
  parameter int unsigned AW    = 13,
  parameter int unsigned NSORT = 16,
  parameter int unsigned NWAY  = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [AW-1:0]   src,
  input  logic [31:0]     len,
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

  localparam int unsigned SW = $clog2(NSORT);
  localparam int unsigned LW = $clog2(NWAY);

  typedef enum logic [2:0] {S_IDLE, S_P1, S_MSETUP, S_MERGE, S_DONE} state_e;
  state_e state;

  logic [AW-1:0] src_q, base_a, base_b;
  logic [31:0]   len_q;

  // ---------------- phase 1 ----------------
  logic [31:0]   rd_idx;
  logic          rd_pend;
  logic [31:0]   rd_tag;
  entry_t        coll [NSORT];
  logic [SW:0]   coll_n;
  logic          cur, wu;
  logic [1:0]    ubusy, urdy;
  logic [SW:0]   unv [2];
  logic [SW:0]   wr_i;
  logic [31:0]   wr_ptr;
  logic [1:0]    fire;
  entry_t        sin  [NSORT];
  entry_t        sout [2][NSORT];
  logic [1:0]    sval;

  always_comb
    for (int i = 0; i < NSORT; i++)
      sin[i] = (i < int'(coll_n)) ? coll[i] : '{tag: '1, val: 32'sh8000_0000};

  for (genvar u = 0; u < 2; u++) begin : g_sort
    sort_unit #(.N(NSORT)) u_sort (
      .clk(clk), .rst_n(rst_n), .in_valid(fire[u]), .in(sin),
      .out_valid(sval[u]), .out(sout[u]));
  end

  logic p1_read, p1_fire, p1_write, p1_end;
  always_comb begin
    p1_read  = (state == S_P1) && (rd_idx < len_q) &&
               (32'(coll_n) + 32'(rd_pend) < NSORT);
    p1_fire  = (state == S_P1) && !ubusy[cur] &&
               ((32'(coll_n) == NSORT) || (rd_idx == len_q && !rd_pend && coll_n != 0));
    fire     = p1_fire ? (cur ? 2'b10 : 2'b01) : 2'b00;
    p1_write = (state == S_P1) && ubusy[wu] && urdy[wu];
    p1_end   = (state == S_P1) && rd_idx == len_q && !rd_pend && coll_n == 0 &&
               ubusy == 2'b00;
  end

  // ---------------- merge passes ----------------
  logic [31:0]   run_len, grp, out_ptr;
  logic [31:0]   lptr [NWAY];
  logic [31:0]   lend [NWAY];
  logic [NWAY-1:0] need;
  logic          m_pend;
  logic [LW-1:0] m_pend_leaf;
  logic          mt_clear, mt_load, mt_pop, mt_valid;
  entry_t        mt_data;
  logic [LW-1:0] mt_leaf;
  logic          m_issue;
  logic [LW-1:0] m_issue_leaf;
  logic          m_refill;

  merge_tree #(.NWAY(NWAY)) u_merge (
    .clk(clk), .rst_n(rst_n), .clear(mt_clear),
    .load_valid(mt_load), .load_leaf(m_pend_leaf), .load_data(entry_t'(rd_data)),
    .pop(mt_pop), .out_valid(mt_valid), .out_data(mt_data), .out_leaf(mt_leaf));

  always_comb begin
    m_issue      = 1'b0;
    m_issue_leaf = '0;
    for (int l = NWAY - 1; l >= 0; l--)
      if (need[l]) begin
        m_issue      = 1'b1;
        m_issue_leaf = LW'(l);
      end
    mt_clear = (state == S_MSETUP);
    mt_load  = (state == S_MERGE) && m_pend;
    mt_pop   = (state == S_MERGE) && !m_pend && !m_issue && mt_valid;
    m_refill = mt_pop && (lptr[mt_leaf] < lend[mt_leaf]);
  end

  // number of merge passes for this length decides where phase 1 writes
  logic [31:0] npass;
  always_comb begin
    logic [63:0] r;
    npass = '0;
    r     = 64'(NSORT);
    for (int i = 0; i < 16; i++)
      if (r < 64'(len)) begin
        npass = npass + 1;
        r     = r * NWAY;
      end
  end

  // ---------------- memory ports ----------------
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    wr_en   = 1'b0;
    wr_addr = '0;
    wr_data = '0;
    if (state == S_P1) begin
      rd_en   = p1_read;
      rd_addr = src_q + AW'(rd_idx);
      wr_en   = p1_write;
      wr_addr = base_a + AW'(wr_ptr);
      wr_data = sout[wu][wr_i[SW-1:0]];
    end else if (state == S_MERGE) begin
      if (m_issue && !m_pend) begin
        rd_en   = 1'b1;
        rd_addr = base_a + AW'(lptr[m_issue_leaf]);
      end else if (m_refill) begin
        rd_en   = 1'b1;
        rd_addr = base_a + AW'(lptr[mt_leaf]);
      end
      wr_en   = mt_pop;
      wr_addr = base_b + AW'(out_ptr);
      wr_data = mt_data;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      src_q   <= '0;
      base_a  <= '0;
      base_b  <= '0;
      len_q   <= '0;
      rd_idx  <= '0;
      rd_pend <= 1'b0;
      rd_tag  <= '0;
      coll_n  <= '0;
      cur     <= 1'b0;
      wu      <= 1'b0;
      ubusy   <= '0;
      urdy    <= '0;
      unv[0]  <= '0;
      unv[1]  <= '0;
      wr_i    <= '0;
      wr_ptr  <= '0;
      run_len <= '0;
      grp     <= '0;
      out_ptr <= '0;
      need    <= '0;
      m_pend  <= 1'b0;
      m_pend_leaf <= '0;
      done    <= 1'b0;
      for (int i = 0; i < NSORT; i++) coll[i] <= '0;
      for (int l = 0; l < NWAY; l++) begin
        lptr[l] <= '0;
        lend[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          src_q   <= src;
          len_q   <= len;
          rd_idx  <= '0;
          rd_pend <= 1'b0;
          coll_n  <= '0;
          cur     <= 1'b0;
          wu      <= 1'b0;
          ubusy   <= '0;
          urdy    <= '0;
          wr_i    <= '0;
          wr_ptr  <= '0;
          // phase 1 writes to dst when the pass count is even
          base_a  <= npass[0] ? dst + AW'(len) : dst;
          base_b  <= npass[0] ? dst : dst + AW'(len);
          state   <= (len == 0) ? S_DONE : S_P1;
        end
        S_P1: begin
          if (p1_read) begin
            rd_idx <= rd_idx + 1;
            rd_tag <= rd_idx;
          end
          rd_pend <= p1_read;
          if (rd_pend) begin
            coll[coll_n[SW-1:0]] <= '{tag: rd_tag, val: rd_data[31:0]};
            coll_n <= coll_n + 1'b1;
          end
          if (p1_fire) begin
            ubusy[cur] <= 1'b1;
            unv[cur]   <= coll_n;
            coll_n     <= '0;
            cur        <= ~cur;
          end
          for (int u = 0; u < 2; u++) if (sval[u]) urdy[u] <= 1'b1;
          if (p1_write) begin
            wr_ptr <= wr_ptr + 1;
            if (wr_i == unv[wu] - 1'b1) begin
              wr_i      <= '0;
              ubusy[wu] <= 1'b0;
              urdy[wu]  <= 1'b0;
              wu        <= ~wu;
            end else begin
              wr_i <= wr_i + 1'b1;
            end
          end
          if (p1_end) begin
            run_len <= 32'(NSORT);
            grp     <= '0;
            out_ptr <= '0;
            state   <= (len_q <= NSORT) ? S_DONE : S_MSETUP;
          end
        end
        S_MSETUP: begin
          for (int l = 0; l < NWAY; l++) begin
            lptr[l] <= grp + 32'(l) * run_len;
            lend[l] <= (grp + 32'(l + 1) * run_len < len_q) ? grp + 32'(l + 1) * run_len : len_q;
            need[l] <= (grp + 32'(l) * run_len < len_q);
          end
          m_pend <= 1'b0;
          state  <= S_MERGE;
        end
        S_MERGE: begin
          m_pend <= 1'b0;
          if (m_issue && !m_pend) begin
            need[m_issue_leaf] <= 1'b0;
            lptr[m_issue_leaf] <= lptr[m_issue_leaf] + 1;
            m_pend      <= 1'b1;
            m_pend_leaf <= m_issue_leaf;
          end else if (mt_pop) begin
            out_ptr <= out_ptr + 1;
            if (m_refill) begin
              lptr[mt_leaf] <= lptr[mt_leaf] + 1;
              m_pend        <= 1'b1;
              m_pend_leaf   <= mt_leaf;
            end
          end else if (!m_pend && !m_issue && !mt_valid) begin
            // group merged
            if (grp + run_len * NWAY >= len_q) begin
              // pass complete
              if (run_len * NWAY >= len_q) begin
                state <= S_DONE;
              end else begin
                run_len <= run_len * NWAY;
                grp     <= '0;
                out_ptr <= '0;
                base_a  <= base_b;
                base_b  <= base_a;
                state   <= S_MSETUP;
              end
            end else begin
              grp   <= grp + run_len * NWAY;
              state <= S_MSETUP;
            end
          end
        end
        default: begin  // S_DONE
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

endmodule
