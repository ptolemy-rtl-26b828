// tb_addr_unit: self-checking test of the address unit.  Programs a random
// layer table through CSR writes, then checks findneuron (layer base plus
// position, one cycle later) and findrf (partial-sum base plus the neuron's
// index times the receptive-field size of the layer named by the previous
// findneuron).
module tb_addr_unit;
  import ptolemy_pkg::*;
  localparam int NL = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_we, req_valid, resp_valid;
  logic [CSR_AW-1:0] csr_addr;
  logic [REG_W-1:0] csr_wdata, a, b, resp;
  opcode_e req_op;

  addr_unit #(.NLAYER(NL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ob [NL], pb [NL], rf [NL];

  task automatic csr(input logic [7:0] ad, input logic [31:0] v);
    @(negedge clk); csr_we = 1; csr_addr = ad; csr_wdata = v;
    @(negedge clk); csr_we = 0;
  endtask

  task automatic req(input opcode_e op, input logic [31:0] x, input logic [31:0] y);
    @(negedge clk); req_valid = 1; req_op = op; a = x; b = y;
    @(negedge clk); req_valid = 0;
    check(resp_valid, "one-cycle response");
  endtask

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; req_valid = 0; req_op = OP_FINDNEURON; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      ob[l] = $urandom % 100000; pb[l] = $urandom % 100000; rf[l] = 1 + $urandom % 5000;
      csr(CSR_LT_OUT + 8'(l), ob[l]);
      csr(CSR_LT_PSUM + 8'(l), pb[l]);
      csr(CSR_LT_RF + 8'(l), rf[l]);
    end
    for (int n = 0; n < 300; n++) begin
      int l, p;
      l = $urandom % NL; p = $urandom % 4096;
      req(OP_FINDNEURON, l, p);
      check(resp == ob[l] + p, "findneuron");
      req(OP_FINDRF, ob[l] + p, 0);
      check(resp == pb[l] + p * rf[l], "findrf");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
