// enhanced_mac: one processing element of the systolic array, with the
// path-extraction additions.
//
// A conventional output-stationary PE: two 16-bit input registers (activation
// from the left neighbour, weight from the neighbour above), a 16x16 signed
// multiplier and a 32-bit accumulator.  The extension compares every product
// (the "partial sum" one input neuron contributes to one output neuron) with
// an absolute threshold and, through a mode multiplexer, sends either the
// single-bit comparison result or the product itself towards the partial-sum
// SRAM.  The block diagram (multiplier, ">?" comparator fed by thd, a mux
// steered by mode, adder with the psum register) is the published one; the
// register placement and the valid bit are this design's choices.
//
// Timing: when en is high the input registers load a_in/w_in/v_in and the
// accumulator adds the product of the values already held, so a value pair
// reaches the accumulator one enabled cycle after it enters the PE.  a_out,
// w_out and v_out are the registered inputs, passed on to the neighbours.
// clr zeroes the accumulator (it wins over en).  sram_out/sram_valid are
// combinational from the input registers.
module enhanced_mac
  import ptolemy_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clr,
  input  logic                     mode,      // 1: mask bit, 0: product
  input  logic signed [ACC_W-1:0]  thd,       // absolute threshold
  input  logic signed [DATA_W-1:0] a_in,
  input  logic signed [DATA_W-1:0] w_in,
  input  logic                     v_in,      // a_in carries a real operand
  output logic signed [DATA_W-1:0] a_out,
  output logic signed [DATA_W-1:0] w_out,
  output logic                     v_out,
  output logic signed [ACC_W-1:0]  psum,      // accumulator
  output logic signed [ACC_W-1:0]  sram_out,  // mode mux output
  output logic                     sram_valid
);

  logic signed [ACC_W-1:0] prod;
  logic                    gt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      w_out <= '0;
      v_out <= 1'b0;
    end else if (en) begin
      a_out <= a_in;
      w_out <= w_in;
      v_out <= v_in;
    end
  end

  always_comb begin
    prod = ACC_W'(a_out) * ACC_W'(w_out);
    gt   = prod > thd;
    sram_out   = mode ? ACC_W'(gt) : prod;
    sram_valid = v_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      psum <= '0;
    else if (clr)    psum <= '0;
    else if (en)     psum <= psum + prod;
  end

endmodule
