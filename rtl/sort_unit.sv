// sort_unit: N-element sorting network (N = 16 by default, the published
// sort-unit width).
//
// A bitonic sorting network orders N (value, tag) entries by descending value;
// equal values are ordered by ascending tag so the result is deterministic.
// The paper names "the classic sorting network" without fixing which one; the
// bitonic network is this design's choice.  The network is combinational and
// its result is registered: out/out_valid follow in/in_valid by one cycle.
// out holds its value until the next in_valid.
module sort_unit
  import ptolemy_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  entry_t in  [N],
  output logic   out_valid,
  output entry_t out [N]
);


  entry_t net [N];

  always_comb begin
    entry_t t;
    t = '0;
    for (int i = 0; i < N; i++) net[i] = in[i];
    for (int k = 2; k <= N; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2)
        for (int i = 0; i < N; i++) begin
          if ((i ^ j) > i) begin
            if (((i & k) == 0) ? entry_ahead(net[i ^ j], net[i]) : entry_ahead(net[i], net[i ^ j])) begin
              t          = net[i];
              net[i]     = net[i ^ j];
              net[i ^ j] = t;
            end
          end
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N; i++) out[i] <= net[i];
    end
  end

  initial assert ((N & (N - 1)) == 0) else $error("sort_unit: N must be a power of two");

endmodule
