// blockmem_tb: self-checking test of BlockMem.
//
// Writes a speculation image through the CPU port from trusted code: three
// blocks of lengths 2, 1 and 3 followed by empty slots, and checks the header
// chain (block_base_i = block_base_(i-1) + 2*len_(i-1) + 1, computed here by
// hand: 0, 5, 8, 15, 16, ...), the headers, and random reads of the pair ports
// against a shadow copy. Also checks that writes from untrusted code and
// writes outside the region leave the memory unchanged, that reads past the
// end return 0, and that reset clears everything.
module blockmem_tb;
  import speccfa_pkg::*;

  localparam int W = 64, NB = 4, NR = 8;
  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  cpu_we, cpu_trusted;
  addr_t cpu_addr, cpu_wdata;
  addr_t blk_base [NB];
  addr_t blk_hdr  [NB];
  addr_t raddr [NR];
  addr_t rdata [NR];
  addr_t shadow [W];
  int checks = 0, failures = 0;

  blockmem #(.BM_WORDS(W), .BM_BASE(16'h0400), .N_BLOCKS(NB), .N_RD(NR)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(input int word, input addr_t v, input bit trusted = 1);
    cpu_we = 1; cpu_trusted = trusted; cpu_addr = addr_t'(16'h0400 + 2 * word); cpu_wdata = v;
    @(posedge clk); #1;
    cpu_we = 0;
    if (trusted && word >= 0 && word < W) shadow[word] = v;
  endtask

  initial begin
    cpu_we = 0; cpu_trusted = 0; cpu_addr = 0; cpu_wdata = 0;
    for (int p = 0; p < NR; p++) raddr[p] = 0;
    for (int i = 0; i < W; i++) shadow[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1;
    for (int p = 0; p < NB; p++) check(blk_hdr[p] == 0, "reset clears headers");
    // block 0: ID 1 len 2 at 0..4; block 1: ID 2 len 1 at 5..7; block 2: ID 3 len 3 at 8..14
    wr(0, 16'h0102); wr(1, 16'h1111); wr(2, 16'h2222); wr(3, 16'h3333); wr(4, 16'h4444);
    wr(5, 16'h0201); wr(6, 16'h5555); wr(7, 16'h6666);
    wr(8, 16'h0303);
    for (int k = 0; k < 6; k++) wr(9 + k, addr_t'(16'h7000 + k));
    #1;
    check(blk_base[0] == 0  && blk_hdr[0] == 16'h0102, "block 0");
    check(blk_base[1] == 5  && blk_hdr[1] == 16'h0201, "block 1");
    check(blk_base[2] == 8  && blk_hdr[2] == 16'h0303, "block 2");
    check(blk_base[3] == 15 && blk_hdr[3] == 16'h0000, "block 3 unused");
    // untrusted write and out-of-range writes are ignored
    wr(3, 16'hBAD0, 0);
    cpu_we = 1; cpu_trusted = 1; cpu_addr = 16'h03FE; cpu_wdata = 16'hBAD1; @(posedge clk); #1;
    cpu_addr = 16'h0400 + 2 * W; @(posedge clk); #1; cpu_we = 0;
    raddr[0] = 3; #1 check(rdata[0] == 16'h3333, "untrusted write ignored");
    raddr[1] = addr_t'(W); raddr[2] = 16'hFFFF; #1;
    check(rdata[1] == 0 && rdata[2] == 0, "read past end is 0");
    // random contents, random reads
    for (int n = 0; n < 200; n++) wr($urandom_range(20, W - 1), addr_t'($urandom));
    for (int n = 0; n < 500; n++) begin
      for (int p = 0; p < NR; p++) raddr[p] = addr_t'($urandom_range(0, W - 1));
      #1;
      for (int p = 0; p < NR; p++) check(rdata[p] == shadow[raddr[p]], "random read");
    end
    // reset clears
    rst_n = 0; #1 rst_n = 1; #1;
    raddr[0] = 1; #1 check(rdata[0] == 0 && blk_hdr[0] == 0, "reset clears words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
