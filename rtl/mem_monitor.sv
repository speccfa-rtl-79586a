// mem_monitor: protects BlockMem from untrusted writers.
//
// Requests a system reset when
//   (PC outside the TCB and the CPU writes an address inside BlockMem), or
//   (DMA accesses an address inside BlockMem),
// which is the paper's Memory Monitor rule. It also exports pc_in_tcb so
// that BlockMem only accepts CPU writes issued by trusted code.
// CPU reads of BlockMem are not restricted, so the CPU read enable is not an
// input. Purely combinational; the reset request is meant for the MCU's reset logic.
// Addresses are byte addresses; BlockMem occupies BM_BASE .. BM_BASE +
// 2*BM_WORDS - 1 and the TCB code TCB_BASE .. TCB_END. These locations are
// this design's choice; the paper does not give a memory map.
module mem_monitor
  import speccfa_pkg::*;
#(
  parameter addr_t       TCB_BASE = 16'hA000,
  parameter addr_t       TCB_END  = 16'hAFFF,
  parameter addr_t       BM_BASE  = 16'h0400,
  parameter int unsigned BM_WORDS = 256
) (
  input  addr_t pc,
  input  logic  w_en,
  input  addr_t d_addr,
  input  logic  dma_en,
  input  addr_t dma_addr,
  output logic  pc_in_tcb,
  output logic  reset_req
);

  localparam logic [16:0] BM_LAST = 17'(BM_BASE) + 17'(2 * BM_WORDS) - 17'd1;

  logic d_in_bm, dma_in_bm;

  assign pc_in_tcb = (pc >= TCB_BASE) && (pc <= TCB_END);
  assign d_in_bm   = (d_addr   >= BM_BASE) && (17'(d_addr)   <= BM_LAST);
  assign dma_in_bm = (dma_addr >= BM_BASE) && (17'(dma_addr) <= BM_LAST);
  assign reset_req = (!pc_in_tcb && w_en && d_in_bm) || (dma_en && dma_in_bm);

endmodule
