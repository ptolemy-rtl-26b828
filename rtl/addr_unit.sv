// addr_unit: neuron and receptive-field address calculation (findneuron,
// findrf).
//
//   findneuron(layer, pos) -> out_base[layer] + pos
//       the address of the neuron at position pos of layer's output feature
//       map; the layer is remembered for the next findrf.
//   findrf(addr)           -> psum_base[L] + (addr - out_base[L]) * rf_size[L]
//       the address of the first partial sum of that neuron's receptive field,
//       for the remembered layer L.
//
// The per-layer table (output base, partial-sum base, receptive-field size)
// is written through CSRs by software, which knows the network's shapes at
// compile time.  The formulas assume the receptive fields' partial sums are
// stored back to back, rf_size words per output neuron, which is how csps
// re-computation lays them out.  The paper gives only what the two
// instructions compute; the table and formulas are this design's choices.
// The result is registered: resp_valid follows req_valid by one cycle.
module addr_unit
  import ptolemy_pkg::*;
#(
  parameter int unsigned NLAYER = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               csr_we,
  input  logic [CSR_AW-1:0]  csr_addr,
  input  logic [REG_W-1:0]   csr_wdata,
  input  logic               req_valid,
  input  opcode_e            req_op,      // OP_FINDNEURON or OP_FINDRF
  input  logic [REG_W-1:0]   a,           // layer id / neuron address
  input  logic [REG_W-1:0]   b,           // neuron position
  output logic               resp_valid,
  output logic [REG_W-1:0]   resp
);

  localparam int unsigned LW = $clog2(NLAYER);

  logic [REG_W-1:0] out_base  [NLAYER];
  logic [REG_W-1:0] psum_base [NLAYER];
  logic [REG_W-1:0] rf_size   [NLAYER];
  logic [LW-1:0]    cur_layer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NLAYER; l++) begin
        out_base[l]  <= '0;
        psum_base[l] <= '0;
        rf_size[l]   <= '0;
      end
      cur_layer  <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
    end else begin
      if (csr_we) begin
        if ((csr_addr & 8'hF0) == CSR_LT_OUT  && 32'(csr_addr[3:0]) < NLAYER) out_base [LW'(csr_addr[3:0])] <= csr_wdata;
        if ((csr_addr & 8'hF0) == CSR_LT_PSUM && 32'(csr_addr[3:0]) < NLAYER) psum_base[LW'(csr_addr[3:0])] <= csr_wdata;
        if ((csr_addr & 8'hF0) == CSR_LT_RF   && 32'(csr_addr[3:0]) < NLAYER) rf_size  [LW'(csr_addr[3:0])] <= csr_wdata;
      end
      resp_valid <= req_valid;
      if (req_valid) begin
        if (req_op == OP_FINDNEURON) begin
          resp      <= out_base[LW'(a)] + b;
          cur_layer <= LW'(a);
        end else begin
          resp <= psum_base[cur_layer] + (a - out_base[cur_layer]) * rf_size[cur_layer];
        end
      end
    end
  end

endmodule
