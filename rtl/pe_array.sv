// pe_array: DIM x DIM output-stationary systolic array of enhanced MACs
// (20 x 20 by default, the published array size).
//
// Each enabled cycle the array takes one activation line (a_line[r] is the
// operand for row r) and one weight line (w_line[c] for column c).  Edge
// skew registers delay row r by r cycles and column c by c cycles, so that
// PE(r,c) multiplies A[r][k] by W[k][c] and accumulates C[r][c] = sum_k
// A[r][k]*W[k][c].  Activations move right and weights move down one PE per
// enabled cycle.  The published design only says "TPU-like systolic array";
// the output-stationary dataflow and the edge skew are this design's choice,
// picked because each PE is described as holding a 32-bit accumulator.
//
// row_en gates whole rows: during partial-sum re-computation only row 0 is
// active (as the paper describes).  en stalls the whole array (used while
// captured partial sums drain into the partial-sum SRAM).  clr clears all
// accumulators.  After the last of K lines, C[r][c] is final once
// r + c + 2 further enabled cycles have passed; all are final after
// 2*DIM enabled cycles.  mask/psum outputs expose every PE's mux output and
// valid bit for the partial-sum capture path.
module pe_array
  import ptolemy_pkg::*;
#(
  parameter int unsigned DIM = 20
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clr,
  input  logic [DIM-1:0]           row_en,
  input  logic                     mode,
  input  logic signed [ACC_W-1:0]  thd,
  input  logic signed [DATA_W-1:0] a_line [DIM],
  input  logic                     a_valid,
  input  logic signed [DATA_W-1:0] w_line [DIM],
  output logic signed [ACC_W-1:0]  psum      [DIM][DIM],
  output logic signed [ACC_W-1:0]  sram_out  [DIM][DIM],
  output logic                     sram_valid[DIM][DIM]
);

  // skew registers: row r gets r stages, column c gets c stages
  // (row/column 0 bypasses the skew); each is a packed shift register
  logic signed [DATA_W-1:0] a_edge [DIM];
  logic                     v_edge [DIM];
  logic signed [DATA_W-1:0] w_edge [DIM];

  assign a_edge[0] = a_line[0];
  assign v_edge[0] = a_valid;
  assign w_edge[0] = w_line[0];

  for (genvar i = 1; i < DIM; i++) begin : g_skew
    logic [i*DATA_W-1:0] a_s, w_s;
    logic [i-1:0]        v_s;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        a_s <= '0;
        w_s <= '0;
        v_s <= '0;
      end else if (en) begin
        a_s <= (a_s << DATA_W) | (i*DATA_W)'(unsigned'(a_line[i]));
        w_s <= (w_s << DATA_W) | (i*DATA_W)'(unsigned'(w_line[i]));
        v_s <= (v_s << 1) | i'(a_valid);
      end
    end
    assign a_edge[i] = a_s[i*DATA_W-1 -: DATA_W];
    assign w_edge[i] = w_s[i*DATA_W-1 -: DATA_W];
    assign v_edge[i] = v_s[i-1];
  end

  logic signed [DATA_W-1:0] a_h [DIM][DIM];
  logic signed [DATA_W-1:0] w_v [DIM][DIM];
  logic                     v_h [DIM][DIM];

  for (genvar r = 0; r < DIM; r++) begin : g_row
    for (genvar c = 0; c < DIM; c++) begin : g_col
      logic signed [DATA_W-1:0] a_i, w_i;
      logic                     v_i;
      if (c == 0) begin : g_left
        assign a_i = a_edge[r];
        assign v_i = v_edge[r];
      end else begin : g_inner_a
        assign a_i = a_h[r][c-1];
        assign v_i = v_h[r][c-1];
      end
      if (r == 0) begin : g_top
        assign w_i = w_edge[c];
      end else begin : g_inner_w
        assign w_i = w_v[r-1][c];
      end
      enhanced_mac u_mac (
        .clk        (clk),
        .rst_n      (rst_n),
        .en         (en && row_en[r]),
        .clr        (clr),
        .mode       (mode),
        .thd        (thd),
        .a_in       (a_i),
        .w_in       (w_i),
        .v_in       (v_i),
        .a_out      (a_h[r][c]),
        .w_out      (w_v[r][c]),
        .v_out      (v_h[r][c]),
        .psum       (psum[r][c]),
        .sram_out   (sram_out[r][c]),
        .sram_valid (sram_valid[r][c])
      );
    end
  end

endmodule
