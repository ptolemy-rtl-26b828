// merge_tree: NWAY-way merge of sorted runs (16-way by default, the published
// merge-tree length).
//
// Each leaf holds the head element of one sorted (descending) run.  A binary
// tournament tree of comparators picks the largest valid head every cycle;
// ties go to the lower leaf, so runs merge stably.  The controller feeding
// the tree loads a leaf's next element with load_valid/load_leaf/load_data and
// removes the current winner with pop; the winner is then invalid until its
// leaf is loaded again.  out_valid is low when every leaf is empty.  The
// winner is combinational from the head registers.  The paper calls this a
// "standard merge tree"; the head-register organisation and the refill
// protocol are this design's choices.
module merge_tree
  import ptolemy_pkg::*;
#(
  parameter int unsigned NWAY = 16,
  localparam int unsigned LW  = $clog2(NWAY)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          load_valid,
  input  logic [LW-1:0] load_leaf,
  input  entry_t        load_data,
  input  logic          pop,
  output logic          out_valid,
  output entry_t        out_data,
  output logic [LW-1:0] out_leaf
);

  logic   hv [NWAY];
  entry_t hd [NWAY];

  // tournament: level arrays stored flat, node n's children are 2n+1, 2n+2
  logic          nv [2*NWAY-1];
  entry_t        nd [2*NWAY-1];
  logic [LW-1:0] nl [2*NWAY-1];


  always_comb begin
    for (int i = 0; i < NWAY; i++) begin
      nv[NWAY-1+i] = hv[i];
      nd[NWAY-1+i] = hd[i];
      nl[NWAY-1+i] = LW'(i);
    end
    for (int n = NWAY - 2; n >= 0; n--) begin
      if (nv[2*n+1] && (!nv[2*n+2] || !entry_ahead(nd[2*n+2], nd[2*n+1]))) begin
        nv[n] = 1'b1;
        nd[n] = nd[2*n+1];
        nl[n] = nl[2*n+1];
      end else begin
        nv[n] = nv[2*n+2];
        nd[n] = nd[2*n+2];
        nl[n] = nl[2*n+2];
      end
    end
    out_valid = nv[0];
    out_data  = nd[0];
    out_leaf  = nl[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NWAY; i++) begin
        hv[i] <= 1'b0;
        hd[i] <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < NWAY; i++) hv[i] <= 1'b0;
    end else begin
      if (pop && out_valid) hv[out_leaf] <= 1'b0;
      if (load_valid) begin
        hv[load_leaf] <= 1'b1;
        hd[load_leaf] <= load_data;
      end
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid);

endmodule
