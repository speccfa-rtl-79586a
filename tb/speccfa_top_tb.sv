// speccfa_top_tb: end-to-end test of the sub-path speculation hardware at its
// default size (8 block slots, 256-word BlockMem, 128-word CF_Log slice).
//
// The testbench plays three roles:
//  * trusted software: loads seven sub-paths into BlockMem from code inside the
//    TCB (slot 7 stays empty), reads CF_Log out when the slice is full and
//    empties it (log_clear);
//  * the CFA module: appends a stream of control flow transfers (hw_en with
//    src/dest), at most one every other cycle;
//  * an attacker: writes BlockMem from untrusted code and through DMA.
// The stream mixes whole sub-paths (often repeated back to back), abandoned
// prefixes and random transfers from the same address pool. A reference model
// written at the level of CF_Log entries (append; per block a match pointer;
// lowest-index complete match wins; all partial matches dropped after a
// detection; ID, or repetition count next to the ID) predicts CF_size after
// every transfer and every CF_Log word at each slice.
// Sub-path 2 is a suffix of sub-path 3, so both complete on the same transfer;
// sub-path 5 sits inside sub-path 6, so 6 is always dropped when 5 completes.
// Each mechanism is counted and must occur: ID replacement, first and
// subsequent repeat, simultaneous detection, partial match dropped by another
// detection, mismatch, slice full/clear, and both Memory Monitor resets.
module speccfa_top_tb;
  import speccfa_pkg::*;

  localparam int NB = 8, LOGW = 128, MAXL = 8;
  localparam addr_t BM_BASE = 16'h0400;

  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  hw_en, w_en, dma_en, log_clear, log_full, log_overflow, reset_req;
  addr_t src, dest, pc, d_addr, d_wdata, dma_addr, log_raddr, log_rdata, cf_size;
  spec_t spec_out;

  speccfa_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- sub-path definitions ----------------
  int    bl_len [NB];
  int    bl_id  [NB];
  addr_t bl_src [NB][MAXL];
  addr_t bl_dst [NB][MAXL];

  function automatic addr_t ps(input int a); return addr_t'(16'hC000 + 16 * a); endfunction
  function automatic addr_t pd(input int a); return addr_t'(16'hD000 + 16 * a); endfunction

  task automatic def(input int b, input int id, input int len, input int seq [MAXL]);
    bl_id[b] = id; bl_len[b] = len;
    for (int k = 0; k < len; k++) begin bl_src[b][k] = ps(seq[k]); bl_dst[b][k] = pd(seq[k]); end
  endtask

  // ---------------- reference model ----------------
  addr_t ref_log [LOGW];
  int    ref_size;
  int    ref_ptr [NB];
  bit    ref_last_valid;
  int    ref_last_id, ref_last_addr, ref_ctr;

  int n_det, n_first, n_subseq, n_simul, n_abort, n_mismatch, n_slice, n_mon_cpu, n_mon_dma, n_xfer;

  task automatic ref_flush();
    ref_size = 0;
    for (int i = 0; i < NB; i++) ref_ptr[i] = 0;
    ref_last_valid = 0; ref_ctr = 2;
  endtask

  task automatic ref_transfer(input addr_t s, input addr_t d);
    int win, ncand, start;
    bit same;
    ref_log[ref_size] = s; ref_log[ref_size + 1] = d; ref_size += 2;
    win = -1; ncand = 0;
    for (int i = 0; i < NB; i++) begin
      if (bl_len[i] == 0) continue;
      if (s == bl_src[i][ref_ptr[i]] && d == bl_dst[i][ref_ptr[i]]) begin
        ref_ptr[i]++;
        if (ref_ptr[i] == bl_len[i]) begin
          ncand++;
          if (win < 0) win = i;
          ref_ptr[i] = 0;
        end
      end else begin
        if (ref_ptr[i] > 0) n_mismatch++;
        ref_ptr[i] = 0;
      end
    end
    if (win < 0) return;
    if (ncand > 1) n_simul++;
    for (int i = 0; i < NB; i++) begin
      if (ref_ptr[i] > 0) n_abort++;
      ref_ptr[i] = 0;
    end
    start = ref_size - 2 * bl_len[win];
    same  = ref_last_valid && ref_last_id == bl_id[win] && ref_last_addr + 2 == start && ref_ctr != 16'hFFFF;
    if (same && ref_ctr == 2) begin
      ref_log[start] = addr_t'(ref_ctr); ref_size = start + 2;
      ref_last_addr = start; ref_ctr++; n_first++;
    end else if (same) begin
      ref_log[ref_last_addr] = addr_t'(ref_ctr); ref_size = ref_last_addr + 2;
      ref_ctr++; n_subseq++;
    end else begin
      ref_log[start] = addr_t'(bl_id[win]); ref_size = start + 2;
      ref_last_valid = 1; ref_last_id = bl_id[win]; ref_last_addr = start; ref_ctr = 2; n_det++;
    end
  endtask

  // ---------------- drivers ----------------
  task automatic cpu_write(input addr_t a, input addr_t v, input addr_t from_pc);
    pc = from_pc; w_en = 1; d_addr = a; d_wdata = v;
    #1;
    if (from_pc >= 16'hA000 && from_pc <= 16'hAFFF) check(!reset_req, "trusted BlockMem write allowed");
    else begin check(reset_req, "untrusted BlockMem write -> reset"); n_mon_cpu++; end
    @(posedge clk); #1;
    w_en = 0; pc = 16'h8000;
  endtask

  task automatic load_blockmem();
    int w = 0;
    for (int b = 0; b < NB; b++) begin
      cpu_write(addr_t'(BM_BASE + 2 * w), addr_t'({bl_id[b][7:0], bl_len[b][7:0]}), 16'hA010);
      w++;
      for (int k = 0; k < bl_len[b]; k++) begin
        cpu_write(addr_t'(BM_BASE + 2 * w), bl_src[b][k], 16'hA010); w++;
        cpu_write(addr_t'(BM_BASE + 2 * w), bl_dst[b][k], 16'hA010); w++;
      end
    end
  endtask

  task automatic compare_log(input string what);
    check(cf_size == addr_t'(ref_size), {what, ": CF_size"});
    for (int i = 0; i < ref_size; i++) begin
      log_raddr = addr_t'(i); #1;
      check(log_rdata == ref_log[i], $sformatf("%s: CF_Log word %0d", what, i));
    end
  endtask

  task automatic slice();
    compare_log("slice");
    n_slice++;
    log_clear = 1; @(posedge clk); #1 log_clear = 0;
    ref_flush();
    check(cf_size == 0, "CF_size after clear");
  endtask

  task automatic transfer(input addr_t s, input addr_t d);
    if (ref_size + 2 > LOGW) begin
      check(log_full, "log_full when no room");
      slice();
    end
    hw_en = 1; src = s; dest = d;
    @(posedge clk); #1;
    hw_en = 0;
    n_xfer++;
    ref_transfer(s, d);
    @(posedge clk); #1;   // detect / rewrite cycle
    check(cf_size == addr_t'(ref_size), "CF_size after transfer");
    repeat ($urandom_range(0, 2)) @(posedge clk);
    #1;
  endtask

  task automatic emit_path(input int b, input int upto);
    for (int k = 0; k < upto; k++) transfer(bl_src[b][k], bl_dst[b][k]);
  endtask

  initial begin
    int seq [MAXL];
    hw_en = 0; w_en = 0; dma_en = 0; log_clear = 0; src = 0; dest = 0;
    pc = 16'h8000; d_addr = 0; d_wdata = 0; dma_addr = 0; log_raddr = 0;
    for (int b = 0; b < NB; b++) bl_len[b] = 0;
    seq = '{0, 1, 2, 3, 0, 0, 0, 0};  def(0, 8'h11, 4, seq);
    seq = '{4, 0, 0, 0, 0, 0, 0, 0};  def(1, 8'h12, 1, seq);
    seq = '{5, 6, 0, 0, 0, 0, 0, 0};  def(2, 8'h13, 2, seq);
    seq = '{7, 5, 6, 0, 0, 0, 0, 0};  def(3, 8'h14, 3, seq);
    seq = '{0, 1, 8, 9, 2, 3, 0, 0};  def(4, 8'h15, 6, seq);
    seq = '{10, 11, 0, 0, 0, 0, 0, 0}; def(5, 8'h16, 2, seq);
    seq = '{12, 13, 10, 11, 14, 15, 12, 1}; def(6, 8'h17, 8, seq);
    ref_flush();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    load_blockmem();

    // attacker: untrusted write to block 0's header, then DMA into BlockMem
    cpu_write(BM_BASE, 16'h1101, 16'h8123);
    dma_en = 1; dma_addr = BM_BASE + 16'd10; #1;
    check(reset_req, "DMA into BlockMem -> reset"); n_mon_dma++;
    @(posedge clk); #1 dma_en = 0; #1;
    check(!reset_req, "no reset when quiet");

    // sanity: a plain sub-path gives its ID
    emit_path(0, 4);
    check(cf_size == 2, "sub-path 0 replaced by one entry");

    for (int n = 0; n < 1500; n++) begin
      int r, b;
      r = $urandom_range(0, 99);
      b = $urandom_range(0, NB - 1);
      if (r < 45) begin
        repeat ($urandom_range(1, 6)) emit_path(b, bl_len[b]);
      end else if (r < 60) begin
        if (bl_len[b] > 1) emit_path(b, $urandom_range(1, bl_len[b] - 1));
        transfer(ps($urandom_range(0, 16)), pd($urandom_range(0, 16)));
      end else begin
        int a, c;
        a = $urandom_range(0, 16);
        c = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 16) : a;
        transfer(ps(a), pd(c));
      end
    end
    compare_log("final");

    $display("transfers=%0d id_writes=%0d first_repeat=%0d subseq_repeat=%0d simultaneous=%0d dropped_partial=%0d mismatch=%0d slices=%0d monitor_cpu=%0d monitor_dma=%0d",
             n_xfer, n_det, n_first, n_subseq, n_simul, n_abort, n_mismatch, n_slice, n_mon_cpu, n_mon_dma);
    check(n_det > 0, "ID replacement happened");
    check(n_first > 0, "first repeat happened");
    check(n_subseq > 0, "subsequent repeat happened");
    check(n_simul > 0, "simultaneous detection happened");
    check(n_abort > 0, "partial match dropped by detect_any happened");
    check(n_mismatch > 0, "mismatch reset happened");
    check(n_slice > 0, "slice full/clear happened");
    check(n_mon_cpu > 0 && n_mon_dma > 0, "memory monitor resets happened");
    check(!log_overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
