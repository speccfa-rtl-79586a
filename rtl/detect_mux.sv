// detect_mux: selects one Block Detect report for Repeat Detect.
//
// All Block Detect outputs enter; the lowest-numbered module with detect_active
// set wins and supplies active_ID and active_addr (the paper's if / else-if
// chain from index 0 upwards). detect_any is the OR of every detect_active bit.
// When nothing is active the ID and address outputs are 0.
// Purely combinational. The priority order follows the paper; the zero
// output when idle is this design's choice.
module detect_mux
  import speccfa_pkg::*;
#(
  parameter int unsigned N_BLOCKS = 8
) (
  input  detect_t det [N_BLOCKS],
  output detect_t sel   // sel.active = detect_any, sel.id = active_ID, sel.addr = active_addr
);

  always_comb begin
    sel = '0;
    for (int i = N_BLOCKS - 1; i >= 0; i--) begin
      if (det[i].active) begin
        sel.id   = det[i].id;
        sel.addr = det[i].addr;
      end
    end
    for (int i = 0; i < N_BLOCKS; i++)
      sel.active = sel.active | det[i].active;
  end

endmodule
