// tb_psum_buffer: self-checking test of the banked partial-sum buffer with a
// reduced size (4 banks of 16 words).  Tracked group writes of random length
// walk through the address space; the testbench models the half-full flags,
// checks that a tracked write into a full half is refused with wr_stall and
// leaves memory untouched, plays the DMA role by reading a full half back and
// releasing it, and checks flush and untracked writes.
module tb_psum_buffer;
  import ptolemy_pkg::*;
  localparam int NB = 4, BW = 16, WORDS = NB * BW, AW = $clog2(WORDS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_valid, wr_track, wr_stall, flush, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [NB-1:0] wr_mask;
  logic [ACC_W-1:0] wr_data [NB], rd_data;
  logic [1:0] release_half, half_full;

  psum_buffer #(.NBANK(NB), .BANK_WORDS(BW)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, releases = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ACC_W-1:0] shadow [WORDS];
  logic [1:0] mfull;

  task automatic drain(input int h);
    for (int i = 0; i < WORDS / 2; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(h * WORDS / 2 + i);
      @(posedge clk); #1;
      check(rd_data == shadow[h * WORDS / 2 + i], "drained word");
    end
    @(negedge clk); rd_en = 0; release_half = 2'(1 << h);
    @(negedge clk); release_half = 0;
    mfull[h] = 0; releases++;
    check(half_full == mfull, "flags after release");
  endtask

  initial begin
    int ptr, n;
    logic [AW-1:0] a;
    logic touch;
    wr_valid = 0; wr_track = 0; wr_addr = 0; wr_mask = 0; flush = 0; rd_en = 0; rd_addr = 0;
    release_half = 0;
    for (int b = 0; b < NB; b++) wr_data[b] = 0;
    mfull = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ptr = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      n = 1 + $urandom % NB;
      wr_valid = 1; wr_track = 1; wr_addr = AW'(ptr);
      wr_mask = NB'((1 << n) - 1);
      for (int b = 0; b < NB; b++) wr_data[b] = $urandom;
      touch = 0;
      for (int i = 0; i < n; i++) begin
        a = AW'(ptr + i);
        if (mfull[a[AW-1]]) touch = 1;
      end
      #1;
      check(wr_stall == touch, "stall prediction");
      @(posedge clk); #1;
      if (touch) begin
        stalls++;
        @(negedge clk); wr_valid = 0;
        // act as the DMA: copy out the full half that blocks the write
        for (int h = 0; h < 2; h++) if (mfull[h]) drain(h);
      end else begin
        for (int i = 0; i < n; i++) begin
          a = AW'(ptr + i);
          shadow[a] = wr_data[i];
          if (a == AW'(WORDS / 2 - 1)) mfull[0] = 1;
          if (a == AW'(WORDS - 1)) mfull[1] = 1;
        end
        ptr = (ptr + n) % WORDS;
        @(negedge clk); wr_valid = 0;
        check(half_full == mfull, "flags after write");
      end
      if ($urandom % 50 == 0) begin
        // untracked write: goes through even into a full half
        @(negedge clk); wr_valid = 1; wr_track = 0; a = AW'($urandom % WORDS);
        wr_addr = a; wr_mask = 1; wr_data[0] = $urandom;
        #1 check(!wr_stall, "untracked never stalls");
        @(posedge clk); shadow[a] = wr_data[0];
        @(negedge clk); wr_valid = 0; wr_track = 1;
      end
    end
    // flush: the half holding the last tracked write is marked full
    @(negedge clk);
    a = AW'((ptr + WORDS - 1) % WORDS);
    flush = 1;
    @(negedge clk); flush = 0;
    mfull[a[AW-1]] = 1;
    check(half_full == mfull, "flush");
    for (int h = 0; h < 2; h++) if (mfull[h]) drain(h);
    check(stalls > 10 && releases > 10, "stall and release exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
