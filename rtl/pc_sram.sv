// pc_sram: the path constructor's SRAM (64 KB by default, the published
// size) holding partial sums, sorted runs, important-neuron lists, masks and
// paths, one 64-bit word per entry.
//
// Three synchronous ports: a read port and a write port used by the path
// constructor's units, and a read/write port for the DMA.  The separate DMA
// port is what lets transfers overlap with computation; the paper describes
// this SRAM as double-buffered, and here the two buffers are simply two
// address ranges that software assigns, a choice of this design.  Reads take
// one cycle.  If the unit and DMA ports write the same word in one cycle the
// DMA write wins.
module pc_sram
  import ptolemy_pkg::*;
#(
  parameter int unsigned BYTES = 65536,
  parameter int unsigned WORDS = BYTES / (PC_W / 8),
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [PC_W-1:0] rd_data,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [PC_W-1:0] wr_data,
  input  logic            x_en,
  input  logic            x_we,
  input  logic [AW-1:0]   x_addr,
  input  logic [PC_W-1:0] x_wdata,
  output logic [PC_W-1:0] x_rdata
);

  logic [PC_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (x_en && x_we) mem[x_addr] <= x_wdata;
    if (rd_en) rd_data <= mem[rd_addr];
    if (x_en && !x_we) x_rdata <= mem[x_addr];
  end

endmodule
