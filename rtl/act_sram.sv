// act_sram: the accelerator's on-chip SRAM for weights and feature maps
// (1.5 MB by default, the published capacity).
//
// It is organised as LINES lines of DIM 16-bit lanes, one lane per array
// row or column, so that one line feeds a whole edge of the systolic array
// in one cycle.  Two synchronous read ports (activations, weights) and one
// write port; reads return data one cycle after the request.  The published
// SRAM is banked at 64 KB granularity; here the banks are the address ranges
// of one wide array (bank = line / BANK_LINES) rather than separate macros,
// which is this design's simplification.  Writes and reads to the same line
// in the same cycle return the old data.
module act_sram
  import ptolemy_pkg::*;
#(
  parameter int unsigned DIM   = 20,
  parameter int unsigned BYTES = 1572864,                 // 1.5 MB
  parameter int unsigned LINES = BYTES / (DIM * DATA_W / 8),
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic                     clk,
  input  logic                     ra_en,
  input  logic [AW-1:0]            ra_addr,
  output logic signed [DATA_W-1:0] ra_data [DIM],
  input  logic                     rb_en,
  input  logic [AW-1:0]            rb_addr,
  output logic signed [DATA_W-1:0] rb_data [DIM],
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic signed [DATA_W-1:0] wdata [DIM]
);

  logic [DIM*DATA_W-1:0] mem [LINES];
  logic [DIM*DATA_W-1:0] qa, qb, wline;

  always_comb
    for (int i = 0; i < DIM; i++) begin
      wline[i*DATA_W +: DATA_W] = wdata[i];
      ra_data[i] = qa[i*DATA_W +: DATA_W];
      rb_data[i] = qb[i*DATA_W +: DATA_W];
    end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wline;
    if (ra_en) qa <= mem[ra_addr];
    if (rb_en) qb <= mem[rb_addr];
  end

endmodule
