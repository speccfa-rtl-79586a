// block_detect: watches CF_Log appends for one verifier-specified sub-path.
//
// One instance exists per speculated sub-path ("block"). The block is stored in
// BlockMem as a header word {ID[15:8], len[7:0]} at word offset block_base,
// followed by len pairs of words (src_k, dest_k). BlockMem supplies the base and
// the header; the module reads the pair selected by its block pointer block_ptr
// through two combinational BlockMem read ports. Each time the CFA module appends a transfer (hw_en)
// the pair (src, dest) is classified as
//   transfer_inter    : matches pair block_ptr and block_ptr <  len-1
//   transfer_last     : matches pair block_ptr and block_ptr == len-1
//   transfer_mismatch : does not match
// and the Idle / Monitor / Detect state machine of the paper advances:
//   Idle    (ptr=0)        : inter -> Monitor, last -> Detect, else stay
//   Monitor (ptr+=1)       : inter -> stay, last -> Detect,
//                            detect_any or mismatch -> Idle
//   Detect  (ptr=0, active): last -> Detect, inter -> Monitor, else -> Idle
// On transfer_last the start of the sub-path in CF_Log (active_addr) is
// registered. In the Detect state, which lasts one cycle unless another
// transfer arrives in it, det.active (detect_active) is high and det.id /
// det.addr carry block_ID and active_addr.
//
// Timing: hw_en is sampled with src/dest and cf_size in the same cycle. cf_size
// is the word offset at which the CFA module is writing this pair, so the pair
// lands at cf_size and the sub-path starts at cf_size - 2*(len-1).
//
// Taken from the paper: the state machine, the three transfer classes and the
// header layout. The base address chain (block_base of block i+1 =
// block_base_i + 2*len_i + 1) is computed inside BlockMem's read logic.
// Choices of this design: the pair k is read at block_base + 2k + 1 and
// block_base + 2k + 2 (the paper prints block_base + ptr + 1 / + 2, which
// contradicts its own memory layout); active_addr is the true first word of the
// sub-path and is registered on every transfer_last; a block whose len is 0 is
// an unused slot and never matches.
module block_detect
  import speccfa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       flush,
  // BlockMem placement
  input  addr_t      block_base,
  input  addr_t      block_hdr,    // {block_ID, block_len}
  // BlockMem read ports: [0] block_src, [1] block_dest
  output addr_t      bm_raddr [2],
  input  addr_t      bm_rdata [2],
  // transfer being appended to CF_Log by the CFA module
  input  logic       hw_en,
  input  addr_t      src,
  input  addr_t      dest,
  input  addr_t      cf_size,
  // some module (this one included) is reporting a detection
  input  logic       detect_any,
  // detect_active, block_ID, active_addr
  output detect_t    det
);

  bd_state_t state_q, state_d;
  len_t      ptr_q, ptr_d;
  addr_t     active_addr_q;

  id_t   block_id;
  len_t  block_len;
  addr_t block_src, block_dest;
  addr_t pair_off;

  assign block_id   = block_hdr[15:8];
  assign block_len  = block_hdr[7:0];
  assign block_src  = bm_rdata[0];
  assign block_dest = bm_rdata[1];

  // word offset of pair ptr inside the block: 2*ptr
  assign pair_off    = addr_t'({ptr_q, 1'b0});
  assign bm_raddr[0] = block_base + pair_off + addr_t'(1);
  assign bm_raddr[1] = block_base + pair_off + addr_t'(2);

  logic pair_match, transfer_inter, transfer_last, transfer_mismatch;
  len_t len_m1;

  assign len_m1            = block_len - len_t'(1);
  assign pair_match        = (block_len != '0) && (src == block_src) && (dest == block_dest);
  assign transfer_mismatch = hw_en && !pair_match;
  assign transfer_inter    = hw_en && pair_match && (ptr_q <  len_m1);
  assign transfer_last     = hw_en && pair_match && (ptr_q == len_m1);

  always_comb begin
    state_d = state_q;
    ptr_d   = ptr_q;
    unique case (state_q)
      ST_IDLE: begin
        if (transfer_last) begin
          state_d = ST_DETECT;
          ptr_d   = '0;
        end else if (transfer_inter) begin
          state_d = ST_MONITOR;
          ptr_d   = ptr_q + len_t'(1);
        end else begin
          ptr_d   = '0;
        end
      end
      ST_MONITOR: begin
        if (detect_any || transfer_mismatch) begin
          state_d = ST_IDLE;
          ptr_d   = '0;
        end else if (transfer_last) begin
          state_d = ST_DETECT;
          ptr_d   = '0;
        end else if (transfer_inter) begin
          ptr_d   = ptr_q + len_t'(1);
        end
      end
      ST_DETECT: begin
        if (transfer_last) begin
          state_d = ST_DETECT;
          ptr_d   = '0;
        end else if (transfer_inter) begin
          state_d = ST_MONITOR;
          ptr_d   = ptr_q + len_t'(1);
        end else begin
          state_d = ST_IDLE;
          ptr_d   = '0;
        end
      end
      default: begin
        state_d = ST_IDLE;
        ptr_d   = '0;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= ST_IDLE;
      ptr_q         <= '0;
      active_addr_q <= '0;
    end else if (flush) begin
      state_q <= ST_IDLE;
      ptr_q   <= '0;
    end else begin
      state_q <= state_d;
      ptr_q   <= ptr_d;
      if (transfer_last)
        active_addr_q <= cf_size - addr_t'({len_m1, 1'b0});
    end
  end

  assign det.active = (state_q == ST_DETECT);
  assign det.id     = block_id;
  assign det.addr   = active_addr_q;

endmodule
