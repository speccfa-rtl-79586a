// block_detect_tb: self-checking test of one Block Detect module.
//
// A small BlockMem image lives in the testbench: the block under test sits at
// word 5 with header {ID, len} and pairs (src_k, dest_k) = (0x100+k, 0x200+k).
// Directed cases: a full match and its one-cycle detect latency and CF_Log
// start address, a mismatch, an abort by detect_any, back-to-back occurrences
// (Detect -> Monitor), a one-transfer sub-path (Detect -> Detect) and an unused
// slot (len 0). A random phase then drives transfers drawn from the block's own
// pairs and compares every cycle with a reference model of the paper's
// state-machine rules written independently in the testbench.
module block_detect_tb;
  import speccfa_pkg::*;

  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;

  addr_t   bm [64];
  addr_t   block_base, block_hdr;
  addr_t   bm_raddr [2];
  addr_t   bm_rdata [2];
  logic    hw_en, detect_any;
  addr_t   src, dest, cf_size;
  detect_t det;

  int checks = 0, failures = 0;

  assign block_base  = 16'd5;
  assign block_hdr   = bm[5];
  assign bm_rdata[0] = bm[bm_raddr[0][5:0]];
  assign bm_rdata[1] = bm[bm_raddr[1][5:0]];

  block_detect dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic load_block(input int id, input int len);
    for (int i = 0; i < 64; i++) bm[i] = 16'hDEAD;
    bm[5] = addr_t'({id[7:0], len[7:0]});
    for (int k = 0; k < len; k++) begin
      bm[6 + 2*k] = addr_t'(16'h100 + k);
      bm[7 + 2*k] = addr_t'(16'h200 + k);
    end
  endtask

  // drive one transfer for one cycle (idle cycle follows unless back_to_back)
  task automatic xfer(input int k, input bit good = 1);
    hw_en = 1;
    src   = addr_t'(16'h100 + k);
    dest  = good ? addr_t'(16'h200 + k) : 16'h0BAD;
    @(posedge clk); #1;
    hw_en = 0;
    cf_size = cf_size + 2;
  endtask

  task automatic expect_detect(input bit exp, input int id, input int addr, input string what);
    check(det.active == exp, {what, ": detect_active"});
    if (exp) begin
      check(det.id == id[7:0], {what, ": block_ID"});
      check(det.addr == addr_t'(addr), {what, ": active_addr"});
    end
  endtask

  // reference model state
  int ref_ptr; bit ref_det; int ref_addr;

  initial begin
    hw_en = 0; detect_any = 0; src = 0; dest = 0; cf_size = 0;
    load_block(7, 3);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // 1: full match, detect exactly one cycle after the last transfer
    cf_size = 20;
    xfer(0); expect_detect(0, 0, 0, "m1 after 1st");
    xfer(1); expect_detect(0, 0, 0, "m1 after 2nd");
    xfer(2); expect_detect(1, 7, 20, "m1 after 3rd");
    @(posedge clk); #1; expect_detect(0, 0, 0, "m1 detect lasts one cycle");

    // 2: mismatch in the middle
    cf_size = 40;
    xfer(0); xfer(1, 0); xfer(2);
    expect_detect(0, 0, 0, "mismatch");
    @(posedge clk); #1;
    xfer(0); xfer(1); xfer(1);
    expect_detect(0, 0, 0, "wrong order");

    // 3: detect_any aborts a partial match
    @(posedge clk); #1;
    xfer(0); xfer(1);
    detect_any = 1; @(posedge clk); #1; detect_any = 0;
    xfer(2);
    expect_detect(0, 0, 0, "aborted by detect_any");

    // 3b: flush aborts a partial match
    @(posedge clk); #1;
    xfer(0); xfer(1);
    flush = 1; @(posedge clk); #1; flush = 0;
    xfer(2);
    expect_detect(0, 0, 0, "aborted by flush");

    // 4: back-to-back occurrences, second starts in the Detect cycle
    cf_size = 60;
    xfer(0); xfer(1); xfer(2);
    expect_detect(1, 7, 60, "b2b first");
    xfer(0);  // issued during Detect
    expect_detect(0, 0, 0, "b2b in monitor");
    xfer(1); xfer(2);
    expect_detect(1, 7, 66, "b2b second");

    // 5: one-transfer sub-path, Detect -> Detect
    @(posedge clk); #1;
    load_block(9, 1);
    cf_size = 80;
    xfer(0); expect_detect(1, 9, 80, "len1 first");
    xfer(0); expect_detect(1, 9, 82, "len1 second");
    @(posedge clk); #1; expect_detect(0, 0, 0, "len1 idle");

    // 6: unused slot never matches
    load_block(3, 0);
    bm[6] = 16'h100; bm[7] = 16'h200;
    xfer(0); xfer(0);
    expect_detect(0, 0, 0, "len0");

    // 7: random stream against a reference model (len 4)
    load_block(11, 4);
    @(posedge clk); #1;
    ref_ptr = 0; ref_det = 0; cf_size = 0;
    for (int n = 0; n < 3000; n++) begin
      int k; bit good, fire;
      fire = ($urandom_range(0, 2) != 0);
      k    = $urandom_range(0, 4);      // 4 = a pair not in the block
      good = (k < 4) && ($urandom_range(0, 9) != 0);
      if (fire) begin
        hw_en = 1; src = addr_t'(16'h100 + k); dest = good ? addr_t'(16'h200 + k) : 16'h0BAD;
        // reference: paper block_ptr rules
        ref_det = 0;
        if (good && k == ref_ptr) begin
          if (ref_ptr == 3) begin ref_det = 1; ref_addr = cf_size - 6; ref_ptr = 0; end
          else ref_ptr = ref_ptr + 1;
        end else ref_ptr = 0;
      end else begin
        ref_det = 0;
      end
      @(posedge clk); #1;
      if (fire) begin hw_en = 0; cf_size = addr_t'(cf_size + 2); end
      check(det.active == ref_det, "random detect_active");
      if (ref_det) check(det.addr == addr_t'(ref_addr) && det.id == 8'd11, "random addr/id");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
