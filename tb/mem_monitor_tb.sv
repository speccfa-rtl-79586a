// mem_monitor_tb: self-checking test of the Memory Monitor.
//
// BlockMem at bytes 0x0400..0x05FF, TCB code at 0xA000..0xAFFF. Directed
// cases at the region edges (first/last byte inside and outside) for CPU
// writes from trusted and untrusted code, CPU writes elsewhere, and DMA
// accesses; then random stimulus against the rule
//   reset = (!PC in TCB && W_en && D_addr in BlockMem) || (DMA_en && DMA_addr in BlockMem).
module mem_monitor_tb;
  import speccfa_pkg::*;

  addr_t pc, d_addr, dma_addr;
  logic  w_en, dma_en, pc_in_tcb, reset_req;
  int checks = 0, failures = 0;

  mem_monitor #(.TCB_BASE(16'hA000), .TCB_END(16'hAFFF), .BM_BASE(16'h0400), .BM_WORDS(256)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s pc=%h w=%0d d=%h dma=%0d da=%h", what, pc, w_en, d_addr, dma_en, dma_addr); end
  endtask

  task automatic drive(input addr_t p, input bit w, input addr_t d, input bit de, input addr_t da, input bit exp, input string what);
    pc = p; w_en = w; d_addr = d; dma_en = de; dma_addr = da;
    #1 check(reset_req == exp, what);
  endtask

  initial begin
    drive(16'h8000, 1, 16'h0400, 0, 0, 1, "untrusted write first byte");
    drive(16'h8000, 1, 16'h05FF, 0, 0, 1, "untrusted write last byte");
    drive(16'h8000, 1, 16'h03FF, 0, 0, 0, "untrusted write below");
    drive(16'h8000, 1, 16'h0600, 0, 0, 0, "untrusted write above");
    drive(16'h8000, 0, 16'h0500, 0, 0, 0, "untrusted read");
    drive(16'hA000, 1, 16'h0500, 0, 0, 0, "TCB first byte writes");
    drive(16'hAFFF, 1, 16'h0500, 0, 0, 0, "TCB last byte writes");
    drive(16'h9FFF, 1, 16'h0500, 0, 0, 1, "just below TCB");
    drive(16'hB000, 1, 16'h0500, 0, 0, 1, "just above TCB");
    drive(16'hA100, 0, 16'h0000, 1, 16'h0400, 1, "DMA in BlockMem from TCB time");
    drive(16'h8000, 0, 16'h0000, 1, 16'h05FE, 1, "DMA in BlockMem");
    drive(16'h8000, 0, 16'h0000, 1, 16'h0600, 0, "DMA outside");
    drive(16'h8000, 0, 16'h0000, 0, 16'h0500, 0, "DMA idle");
    check(dut.pc_in_tcb == 0, "pc_in_tcb low");
    for (int n = 0; n < 5000; n++) begin
      bit exp, tcb, din, dmain;
      pc = addr_t'($urandom_range(16'h9F00, 16'hB0FF));
      d_addr = addr_t'($urandom_range(16'h0300, 16'h0700));
      dma_addr = addr_t'($urandom_range(16'h0300, 16'h0700));
      w_en = $urandom_range(0, 1); dma_en = $urandom_range(0, 1);
      tcb = (pc >= 16'hA000 && pc <= 16'hAFFF);
      din = (d_addr >= 16'h0400 && d_addr <= 16'h05FF);
      dmain = (dma_addr >= 16'h0400 && dma_addr <= 16'h05FF);
      exp = (!tcb && w_en && din) || (dma_en && dmain);
      #1;
      check(reset_req == exp, "random");
      check(pc_in_tcb == tcb, "random pc_in_tcb");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
