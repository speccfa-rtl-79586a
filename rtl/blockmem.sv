// blockmem: the reserved memory that holds the verifier's sub-path speculations.
//
// Layout (from the paper): blocks are packed one after another starting at word
// 0. Each block is a header word {ID[15:8], len[7:0]} followed by len pairs of
// words (src, dest), so
//   block_base_0 = 0,  block_base_i = block_base_(i-1) + 2*len_(i-1) + 1.
// A header with len = 0 marks an unused block slot.
//
// The CPU writes it with 16-bit word stores at byte addresses BM_BASE ..
// BM_BASE + 2*BM_WORDS - 1, and only while the trusted code runs (cpu_trusted,
// from the Memory Monitor). For the Block Detect modules the memory walks the
// header chain above every cycle and presents, per block slot, block_base and
// the header word; in addition it has N_RD combinational read ports (two per
// Block Detect module, for the expected src and dest) addressed by word offset.
// An offset past the end reads as 0.
// Choices of this design: the size (256 words), the base address, placing the
// base chain here rather than in each Block Detect module, asynchronous reads
// and the clear-to-zero reset (every slot the verifier does not fill reads as
// unused).
module blockmem
  import speccfa_pkg::*;
#(
  parameter int unsigned BM_WORDS = 256,
  parameter addr_t       BM_BASE  = 16'h0400,
  parameter int unsigned N_BLOCKS = 8,
  parameter int unsigned N_RD     = 2 * N_BLOCKS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cpu_we,
  input  logic  cpu_trusted,
  input  addr_t cpu_addr,                // byte address
  input  addr_t cpu_wdata,
  output addr_t blk_base [N_BLOCKS],     // word offset of each block's header
  output addr_t blk_hdr  [N_BLOCKS],     // header word {ID, len}
  input  addr_t raddr    [N_RD],         // word offsets into BlockMem
  output addr_t rdata    [N_RD]
);

  localparam int unsigned IW = $clog2(BM_WORDS);

  addr_t mem [BM_WORDS];

  function automatic addr_t rd(input addr_t a);
    if (32'(a) < 32'(BM_WORDS)) return mem[a[IW-1:0]];
    return '0;
  endfunction

  addr_t woff;
  logic  wsel;
  assign woff = (cpu_addr - BM_BASE) >> 1;
  assign wsel = cpu_we && cpu_trusted && (cpu_addr >= BM_BASE)
                && (32'(woff) < 32'(BM_WORDS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BM_WORDS; i++) mem[i] <= '0;
    end else if (wsel) begin
      mem[woff[IW-1:0]] <= cpu_wdata;
    end
  end

  // header chain
  always_comb begin
    addr_t b;
    addr_t h;
    b = '0;
    for (int i = 0; i < N_BLOCKS; i++) begin
      h           = rd(b);
      blk_base[i] = b;
      blk_hdr[i]  = h;
      b           = b + addr_t'({h[7:0], 1'b0}) + addr_t'(1);
    end
  end

  // pair read ports
  always_comb begin
    for (int p = 0; p < N_RD; p++) rdata[p] = rd(raddr[p]);
  end

endmodule
