// psum_buffer: the partial-sum / mask SRAM added next to the accelerator
// (32 KB in 16 banks of 2 KB by default, the published size and banking).
//
// Word address a lives in bank a % NBANK, row a / NBANK, so a group of up to
// NBANK consecutive words can be written in one cycle without bank conflict;
// this is how the capture path drains up to 16 words per cycle.  The buffer is
// double-buffered towards DRAM: the address space is split in two halves.
// With wr_track set, a write that fills the last word of a half marks that
// half full; a tracked write that touches a full half is refused and wr_stall
// is raised, stalling the producer until the DMA has copied the half out and
// the controller pulses release.  flush marks the half holding the most recent
// tracked write full (end of an infsp).  Untracked writes (csps re-computation)
// bypass the bookkeeping.  One synchronous read port (1-cycle latency) serves
// the DMA.  The split into halves and the flag protocol are this design's
// choices; the paper says only that partial sums and masks are double-buffered
// in the SRAM and to DRAM through a DMA.
module psum_buffer
  import ptolemy_pkg::*;
#(
  parameter int unsigned NBANK      = 16,
  parameter int unsigned BANK_WORDS = 512,                // 2 KB of 32-bit words
  parameter int unsigned WORDS      = NBANK * BANK_WORDS,
  parameter int unsigned AW         = $clog2(WORDS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_valid,
  input  logic                    wr_track,
  input  logic [AW-1:0]           wr_addr,
  input  logic [NBANK-1:0]        wr_mask,
  input  logic [ACC_W-1:0]        wr_data [NBANK],
  output logic                    wr_stall,
  input  logic                    flush,
  input  logic [1:0]              release_half,
  output logic [1:0]              half_full,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic [ACC_W-1:0]        rd_data
);

  localparam int unsigned BW = $clog2(NBANK);

  logic [AW-1:0]    waddr_i [NBANK];
  logic [NBANK-1:0] wmask_b;                     // per bank
  logic [AW-1:0]    wa_b    [NBANK];
  logic [ACC_W-1:0] wd_b    [NBANK];
  logic [ACC_W-1:0] rd_b    [NBANK];
  logic [BW-1:0]    rd_bank;
  logic             touch_full, fill_half0, fill_half1;
  logic [AW-1:0]    last_addr, last_w;
  logic             any_w;

  always_comb begin
    touch_full = 1'b0;
    fill_half0 = 1'b0;
    fill_half1 = 1'b0;
    wmask_b    = '0;
    any_w      = 1'b0;
    last_w     = '0;
    for (int b = 0; b < NBANK; b++) begin
      wa_b[b] = '0;
      wd_b[b] = '0;
    end
    for (int i = 0; i < NBANK; i++) begin
      waddr_i[i] = wr_addr + AW'(i);
      if (wr_valid && wr_mask[i]) begin
        any_w = 1'b1;
        last_w = waddr_i[i];
        if (wr_track && half_full[waddr_i[i][AW-1]]) touch_full = 1'b1;
        if (waddr_i[i] == AW'(WORDS/2 - 1)) fill_half0 = 1'b1;
        if (waddr_i[i] == AW'(WORDS - 1))   fill_half1 = 1'b1;
        wmask_b[waddr_i[i][BW-1:0]] = 1'b1;
        wa_b[waddr_i[i][BW-1:0]]    = waddr_i[i];
        wd_b[waddr_i[i][BW-1:0]]    = wr_data[i];
      end
    end
    wr_stall = touch_full;
  end

  // one single-port-write, single-port-read memory per bank
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [ACC_W-1:0] mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (wmask_b[b] && !touch_full) mem[wa_b[b][AW-1:BW]] <= wd_b[b];
      if (rd_en) rd_b[b] <= mem[rd_addr[AW-1:BW]];
    end
  end

  always_ff @(posedge clk) if (rd_en) rd_bank <= rd_addr[BW-1:0];
  assign rd_data = rd_b[rd_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      half_full <= 2'b00;
      last_addr <= '0;
    end else begin
      if (wr_valid && wr_track && any_w && !touch_full) begin
        if (fill_half0) half_full[0] <= 1'b1;
        if (fill_half1) half_full[1] <= 1'b1;
        last_addr <= last_w;
      end
      if (flush) half_full[last_addr[AW-1]] <= 1'b1;
      if (release_half[0]) half_full[0] <= 1'b0;
      if (release_half[1]) half_full[1] <= 1'b0;
    end
  end

  // A write group is a run of consecutive words starting at wr_addr.
  a_group_prefix: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> ((wr_mask & (wr_mask + 1'b1)) == '0));

endmodule
