// cflog_mem: CF_Log storage and the CF_size register.
//
// CF_Log is an array of 16-bit words; a control flow entry is two words
// (src, dest) and CF_size is the number of words in use, i.e. the offset of the
// next free word. Two writers share it, as in the paper:
//  * the CFA module appends: with hw_en, src goes to word CF_size, dest to
//    CF_size+1 and CF_size advances by 2;
//  * the Memory Interface rewrites: one word (a sub-path ID or a repetition
//    count) and a new CF_size.
// If both touch CF_size in one cycle the Memory Interface wins; the sub-path
// logic never asks for that because it acts one cycle after a transfer and
// transfers are at least two cycles apart (checked by an assertion in the top).
// When fewer than two words are left, full is set and further appends are
// dropped and flagged in overflow; the trusted software then sends the slice
// and pulses clear, which empties the log. A combinational read port serves
// that software. Storage of CF_Log and CF_size belongs to the underlying CFA
// architecture; full/overflow/clear are this design's stand-in for its slice
// handling. 128 words = the 256-byte slice used in the paper's latency tests.
module cflog_mem
  import speccfa_pkg::*;
#(
  parameter int unsigned CFLOG_WORDS = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  // append port (CFA module)
  input  logic  hw_en,
  input  addr_t src,
  input  addr_t dest,
  // rewrite port (Memory Interface)
  input  logic  log_we,
  input  addr_t log_waddr,
  input  addr_t log_wdata,
  input  logic  size_we,
  input  addr_t size_wdata,
  // status and read port
  output addr_t cf_size,
  output logic  full,
  output logic  overflow,
  input  addr_t raddr,
  output addr_t rdata
);

  localparam int unsigned IW = $clog2(CFLOG_WORDS);

  addr_t mem [CFLOG_WORDS];
  addr_t size_q;
  logic  ovf_q;
  logic  append;

  assign full   = (32'(size_q) + 32'd2) > 32'(CFLOG_WORDS);
  assign append = hw_en && !full;

  always_ff @(posedge clk) begin
    if (append) begin
      mem[size_q[IW-1:0]]                <= src;
      mem[size_q[IW-1:0] + IW'(1)]       <= dest;
    end
    if (log_we && (32'(log_waddr) < 32'(CFLOG_WORDS)))
      mem[log_waddr[IW-1:0]] <= log_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      size_q <= '0;
      ovf_q  <= 1'b0;
    end else if (clear) begin
      size_q <= '0;
      ovf_q  <= 1'b0;
    end else begin
      if (size_we)     size_q <= size_wdata;
      else if (append) size_q <= size_q + addr_t'(2);
      if (hw_en && full) ovf_q <= 1'b1;
    end
  end

  assign cf_size  = size_q;
  assign overflow = ovf_q;
  assign rdata    = (32'(raddr) < 32'(CFLOG_WORDS)) ? mem[raddr[IW-1:0]] : '0;

endmodule
