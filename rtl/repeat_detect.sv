// repeat_detect: decides what to write into CF_Log for each detected sub-path.
//
// Input is the MUX output (detect_any, active_ID, active_addr). It keeps the
// previous speculation (last_ID, last_addr) and a repetition counter
// repeat_ctr, which is 2 while no repetition is running. For a detection with
//   same = (active_ID == last_ID) && (last_addr + 2 == active_addr)
// it computes
//   first_repeat  = detect_any && same && repeat_ctr == 2
//   subseq_repeat = detect_any && same && repeat_ctr >  2
// and drives the Memory Interface (all combinational, in the detect cycle):
//   first_repeat  : spec_value = repeat_ctr, spec_addr = last_addr + 2
//   subseq_repeat : spec_value = repeat_ctr, spec_addr = last_addr
//   otherwise     : spec_value = active_ID,  spec_addr = active_addr
//   spec_en       = detect_any
// At the clock edge repeat_ctr becomes repeat_ctr+1 on a repetition and 2 on
// any other detection. So a run of k back-to-back occurrences of one sub-path
// leaves two CF_Log entries: the ID, then the count k.
//
// Taken from the paper: the equations above and the meaning of last_addr (on a
// first repeat it is moved to the counter's entry, which later repeats rewrite).
// Choices of this design:
//  * first_repeat and subseq_repeat are qualified with detect_any, so spec_en
//    is simply detect_any (the paper ORs the ungated terms into spec_en).
//  * last_ID/last_addr are loaded on every detection that is not a subsequent
//    repeat. The paper loads them when repeat_ctr == 2, which read literally
//    would miss the first repeat that follows the end of a run.
//  * a valid bit keeps the reset values of last_ID/last_addr from matching.
//  * flush (CF_Log emptied after a slice was sent) forgets the previous
//    speculation, so no count is written against an entry already sent.
//  * the 16-bit counter saturates: at its maximum a further occurrence starts
//    a new ID entry instead of wrapping.
module repeat_detect
  import speccfa_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  detect_t sel,    // detect_any, active_ID, active_addr
  output spec_t   spec    // spec_en, spec_addr, spec_value
);

  localparam addr_t CTR_INIT = addr_t'(2);

  addr_t repeat_ctr_q;
  addr_t last_addr_q;
  id_t   last_id_q;
  logic  last_valid_q;

  logic same, first_repeat, subseq_repeat, repeat_hit;

  assign same = last_valid_q && (sel.id == last_id_q)
                && ((last_addr_q + addr_t'(2)) == sel.addr)
                && (repeat_ctr_q != '1);
  assign first_repeat  = sel.active && same && (repeat_ctr_q == CTR_INIT);
  assign subseq_repeat = sel.active && same && (repeat_ctr_q >  CTR_INIT);
  assign repeat_hit    = first_repeat || subseq_repeat;

  always_comb begin
    spec.en = sel.active;
    if (repeat_hit) spec.value = repeat_ctr_q;
    else            spec.value = addr_t'(sel.id);
    if (first_repeat)       spec.addr = last_addr_q + addr_t'(2);
    else if (subseq_repeat) spec.addr = last_addr_q;
    else                    spec.addr = sel.addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      repeat_ctr_q <= CTR_INIT;
      last_addr_q  <= '0;
      last_id_q    <= '0;
      last_valid_q <= 1'b0;
    end else if (flush) begin
      repeat_ctr_q <= CTR_INIT;
      last_valid_q <= 1'b0;
    end else if (sel.active) begin
      repeat_ctr_q <= repeat_hit ? repeat_ctr_q + addr_t'(1) : CTR_INIT;
      if (!subseq_repeat) begin
        last_addr_q  <= sel.addr;
        last_id_q    <= sel.id;
        last_valid_q <= 1'b1;
      end
    end
  end

endmodule
