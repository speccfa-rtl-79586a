// repeat_detect_tb: self-checking test of Repeat Detect.
//
// Feeds detections (ID, start address in CF_Log) in the order a CF_Log would
// produce them and keeps a word-level picture of CF_Log in the testbench,
// applying each spec_addr/spec_value rewrite and CF_size = spec_addr + 2 the
// way the Memory Interface does. Expected spec outputs are worked out by hand
// for directed sequences:
//   ID 1 alone                    -> write 1 at its start
//   ID 1 x4 back to back          -> ID 1, then counts 2, 3, 4 in the next entry
//   ID 2 after a run of ID 1      -> write 2, counter restarts
//   ID 2 again adjacent           -> count 2 right after it
//   ID 2 not adjacent (gap)       -> new ID entry, no count
//   different ID adjacent         -> new ID entry
// spec_en must follow detect_any and be silent otherwise.
module repeat_detect_tb;
  import speccfa_pkg::*;

  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;

  detect_t sel;
  spec_t   spec;
  int checks = 0, failures = 0;

  repeat_detect dut (.clk(clk), .rst_n(rst_n), .flush(flush), .sel(sel), .spec(spec));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (en=%0d addr=%0d value=%0d) at %0t", what, spec.en, spec.addr, spec.value, $time); end
  endtask

  // one detection: expected (addr, value)
  task automatic det(input int id, input int addr, input int exp_addr, input int exp_val, input string what);
    sel = '{active: 1'b1, id: id_t'(id), addr: addr_t'(addr)};
    #1;
    check(spec.en, {what, " en"});
    check(spec.addr == addr_t'(exp_addr), {what, " addr"});
    check(spec.value == addr_t'(exp_val), {what, " value"});
    @(posedge clk); #1;
    sel.active = 1'b0;
    #1 check(!spec.en, {what, " en drops"});
    @(posedge clk); #1;
  endtask

  initial begin
    sel = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!spec.en, "idle after reset");

    // first detection of ID 1 at word 10: log holds ID at 10, size 12
    det(1, 10, 10, 1, "first ID1");
    // second occurrence starts at 12 -> first repeat, count 2 at 12
    det(1, 12, 12, 2, "first repeat");
    // third occurrence starts at 14 (size was 14) -> rewrite count at 12 with 3
    det(1, 14, 12, 3, "subseq repeat 3");
    det(1, 14, 12, 4, "subseq repeat 4");
    // ID 2 starts at 14 -> new entry, counter restarts
    det(2, 14, 14, 2, "ID2 after run");
    // ID 2 again right after -> count 2 at 16
    det(2, 16, 16, 2, "ID2 first repeat");
    det(2, 18, 16, 3, "ID2 subseq");
    // ID 2 again with a plain entry in between (starts at 20) -> new ID entry
    det(2, 20, 20, 2, "ID2 not adjacent");
    // ID 3 adjacent to ID 2 -> new ID entry
    det(3, 22, 22, 3, "ID3 adjacent other");
    // ID 3 repeat right after -> count
    det(3, 24, 24, 2, "ID3 repeat");
    // ID 1 adjacent but different from last -> ID entry
    det(1, 26, 26, 1, "ID1 new");

    // flush forgets the previous speculation: adjacent ID1 is a new entry
    flush = 1; @(posedge clk); #1 flush = 0;
    det(1, 28, 28, 1, "after flush");

    // no detections: no writes
    repeat (5) begin @(posedge clk); #1 check(!spec.en, "quiet"); end

    // long run: 300 occurrences back to back
    det(4, 40, 40, 4, "run start");
    for (int k = 2; k <= 300; k++)
      det(4, (k == 2) ? 42 : 44, 42, k, "long run");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
