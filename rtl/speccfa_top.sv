// speccfa_top: sub-path speculation hardware for control flow auditing.
//
// The CFA module of the MCU appends every control flow transfer (src, dest) to
// CF_Log and pulses hw_en while doing so. This block watches those appends and,
// whenever a complete
// verifier-specified sub-path has just been appended, replaces the whole
// sub-path in CF_Log by its one-word ID (or, if the same sub-path repeats back
// to back, by the ID followed by a repetition count), shrinking CF_size.
//
// Structure (as in the paper's component diagram):
//   blockmem       speculations: header {ID,len} + (src,dest) pairs per block
//   block_detect   one per sub-path, Idle/Monitor/Detect state machine
//                  (BlockMem walks the headers and gives each its base)
//   detect_mux     lowest index wins; detect_any = OR of all detections
//   repeat_detect  ID vs. repetition counter, produces spec_en/addr/value
//   mem_interface  writes spec_value at spec_addr, CF_size = spec_addr + 2
//   mem_monitor    reset request on untrusted CPU or any DMA write to BlockMem
//   cflog_mem      CF_Log words and CF_size (owned by the CFA architecture)
//
// Timing: a transfer is appended in the cycle hw_en is high; a sub-path that it
// completes is reported in the next cycle (Detect state) and rewritten in
// CF_Log at the end of that cycle. hw_en must therefore not be high in the
// cycle right after another hw_en (an assertion checks that no append meets a
// rewrite). The MCU's own transfers are several cycles apart.
// The CFA module and the MCU core are outside; their signals are ports.
// Parameters default to the configuration the paper evaluates: 8 sub-paths and a
// 256-byte CF_Log slice. BlockMem size and the memory map are this design's.
module speccfa_top
  import speccfa_pkg::*;
#(
  parameter int unsigned N_BLOCKS    = 8,
  parameter int unsigned BM_WORDS    = 256,
  parameter int unsigned CFLOG_WORDS = 128,
  parameter addr_t       BM_BASE     = 16'h0400,
  parameter addr_t       TCB_BASE    = 16'hA000,
  parameter addr_t       TCB_END     = 16'hAFFF
) (
  input  logic  clk,
  input  logic  rst_n,
  // from the CFA module
  input  logic  hw_en,
  input  addr_t src,
  input  addr_t dest,
  // MCU core and DMA signals
  input  addr_t pc,
  input  logic  w_en,
  input  addr_t d_addr,
  input  addr_t d_wdata,
  input  logic  dma_en,
  input  addr_t dma_addr,
  // trusted software access to CF_Log
  input  logic  log_clear,
  input  addr_t log_raddr,
  output addr_t log_rdata,
  output addr_t cf_size,
  output logic  log_full,
  output logic  log_overflow,
  // visibility of the rewrite being applied this cycle
  output spec_t spec_out,
  // Memory Monitor exception (system reset request)
  output logic  reset_req
);

  localparam int unsigned N_RD = 2 * N_BLOCKS;

  addr_t   bm_raddr [N_RD];
  addr_t   bm_rdata [N_RD];
  addr_t   base [N_BLOCKS];
  addr_t   hdr  [N_BLOCKS];
  detect_t det [N_BLOCKS];
  detect_t sel;
  spec_t   spec;
  logic    pc_in_tcb;
  logic    hw_en_eff;

  logic  log_we, size_we;
  addr_t log_waddr, log_wdata, size_wdata;

  assign hw_en_eff = hw_en && !log_full;

  for (genvar i = 0; i < N_BLOCKS; i++) begin : g_bd
    addr_t ra [2];
    addr_t rd [2];
    for (genvar k = 0; k < 2; k++) begin : g_port
      assign bm_raddr[2*i+k] = ra[k];
      assign rd[k]           = bm_rdata[2*i+k];
    end
    block_detect u_bd (
      .clk        (clk),
      .rst_n      (rst_n),
      .flush      (log_clear),
      .block_base (base[i]),
      .block_hdr  (hdr[i]),
      .bm_raddr   (ra),
      .bm_rdata   (rd),
      .hw_en      (hw_en_eff),
      .src        (src),
      .dest       (dest),
      .cf_size    (cf_size),
      .detect_any (sel.active),
      .det        (det[i])
    );
  end

  blockmem #(
    .BM_WORDS (BM_WORDS),
    .BM_BASE  (BM_BASE),
    .N_BLOCKS (N_BLOCKS),
    .N_RD     (N_RD)
  ) u_blockmem (
    .clk         (clk),
    .rst_n       (rst_n),
    .cpu_we      (w_en),
    .cpu_trusted (pc_in_tcb),
    .cpu_addr    (d_addr),
    .cpu_wdata   (d_wdata),
    .blk_base    (base),
    .blk_hdr     (hdr),
    .raddr       (bm_raddr),
    .rdata       (bm_rdata)
  );

  detect_mux #(.N_BLOCKS(N_BLOCKS)) u_mux (
    .det (det),
    .sel (sel)
  );

  repeat_detect u_rep (
    .clk   (clk),
    .rst_n (rst_n),
    .flush (log_clear),
    .sel   (sel),
    .spec  (spec)
  );

  mem_interface #(.CFLOG_WORDS(CFLOG_WORDS)) u_mif (
    .spec       (spec),
    .log_we     (log_we),
    .log_waddr  (log_waddr),
    .log_wdata  (log_wdata),
    .size_we    (size_we),
    .size_wdata (size_wdata)
  );

  mem_monitor #(
    .TCB_BASE (TCB_BASE),
    .TCB_END  (TCB_END),
    .BM_BASE  (BM_BASE),
    .BM_WORDS (BM_WORDS)
  ) u_mon (
    .pc        (pc),
    .w_en      (w_en),
    .d_addr    (d_addr),
    .dma_en    (dma_en),
    .dma_addr  (dma_addr),
    .pc_in_tcb (pc_in_tcb),
    .reset_req (reset_req)
  );

  cflog_mem #(.CFLOG_WORDS(CFLOG_WORDS)) u_log (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (log_clear),
    .hw_en      (hw_en),
    .src        (src),
    .dest       (dest),
    .log_we     (log_we),
    .log_waddr  (log_waddr),
    .log_wdata  (log_wdata),
    .size_we    (size_we),
    .size_wdata (size_wdata),
    .cf_size    (cf_size),
    .full       (log_full),
    .overflow   (log_overflow),
    .raddr      (log_raddr),
    .rdata      (log_rdata)
  );

  assign spec_out = spec;

  // A CF_Log rewrite and a CFA append must never meet in one cycle.
  a_no_append_during_rewrite: assert property (
    @(posedge clk) disable iff (!rst_n) !(hw_en_eff && spec.en))
    else $error("hw_en in the cycle of a sub-path rewrite");

endmodule
