// cflog_mem_tb: self-checking test of CF_Log storage and CF_size.
//
// A 16-word log. Appends pairs and checks CF_size advancing by 2 and the words
// read back; rewrites one word with a new CF_size (the Memory Interface's
// operation) and checks that the next append lands right after it; fills the
// log and checks full, dropped appends and the sticky overflow flag; clears it.
// A shadow model in the testbench predicts every word.
module cflog_mem_tb;
  import speccfa_pkg::*;

  localparam int W = 16;
  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  clear, hw_en, log_we, size_we, full, overflow;
  addr_t src, dest, log_waddr, log_wdata, size_wdata, cf_size, raddr, rdata;
  addr_t shadow [W];
  int    ssize;
  int checks = 0, failures = 0;

  cflog_mem #(.CFLOG_WORDS(W)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t (size=%0d)", what, $time, cf_size); end
  endtask

  task automatic append(input addr_t s, input addr_t d);
    hw_en = 1; src = s; dest = d;
    @(posedge clk); #1;
    hw_en = 0;
    if (ssize + 2 <= W) begin shadow[ssize] = s; shadow[ssize + 1] = d; ssize += 2; end
  endtask

  task automatic rewrite(input int a, input addr_t v);
    log_we = 1; log_waddr = addr_t'(a); log_wdata = v; size_we = 1; size_wdata = addr_t'(a + 2);
    @(posedge clk); #1;
    log_we = 0; size_we = 0;
    shadow[a] = v; ssize = a + 2;
  endtask

  task automatic compare(input string what);
    check(cf_size == addr_t'(ssize), {what, " cf_size"});
    for (int i = 0; i < ssize; i++) begin
      raddr = addr_t'(i); #1;
      check(rdata == shadow[i], $sformatf("%s word %0d", what, i));
    end
  endtask

  initial begin
    clear = 0; hw_en = 0; log_we = 0; size_we = 0; src = 0; dest = 0;
    log_waddr = 0; log_wdata = 0; size_wdata = 0; raddr = 0; ssize = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(cf_size == 0 && !full && !overflow, "empty after reset");
    append(16'hC000, 16'hC010); append(16'hC020, 16'hC030); append(16'hC040, 16'hC050);
    compare("three appends");
    rewrite(2, 16'h0001);
    compare("rewrite");
    append(16'hD000, 16'hD002);
    compare("append after rewrite");
    for (int k = 0; k < 5; k++) append(addr_t'(16'hE000 + k), addr_t'(16'hE100 + k));
    compare("fill");
    check(full && cf_size == 16, "full");
    check(!overflow, "no overflow yet");
    append(16'hF000, 16'hF001);
    check(overflow, "overflow after dropped append");
    compare("dropped append");
    clear = 1; @(posedge clk); #1 clear = 0;
    ssize = 0;
    check(cf_size == 0 && !full && !overflow, "clear");
    for (int n = 0; n < 300; n++) begin
      if (ssize >= 4 && $urandom_range(0, 3) == 0) rewrite(ssize - 4, addr_t'($urandom_range(1, 255)));
      else if (ssize + 2 <= W) append(addr_t'($urandom), addr_t'($urandom));
      else begin clear = 1; @(posedge clk); #1 clear = 0; ssize = 0; end
      compare("random");
    end
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
