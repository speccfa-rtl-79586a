// speccfa_pkg: types and constants shared by the sub-path speculation hardware.
//
// The target MCU has a 16-bit address space, so control flow addresses, CF_Log
// offsets and CF_size are 16-bit words (this follows the paper's MSP430 target).
// Sub-path IDs and lengths are 8 bits each and share one BlockMem word:
// ID in bits [15:8], length in bits [7:0] (also from the paper).
// The three structs bundle the signal groups that recur between the
// sub-modules: a detection report, and a CF_Log rewrite request.
package speccfa_pkg;

  localparam int unsigned ADDR_W = 16;   // MCU address / data word width
  localparam int unsigned ID_W   = 8;    // sub-path ID width
  localparam int unsigned LEN_W  = 8;    // sub-path length width

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [ID_W-1:0]   id_t;
  typedef logic [LEN_W-1:0]  len_t;

  // Output of one Block Detect module, and of the MUX that selects among them:
  // active = detect_active (detect_any after the MUX), id = block_ID / active_ID,
  // addr = active_addr (word offset of the sub-path's first entry in CF_Log).
  typedef struct packed {
    logic  active;
    id_t   id;
    addr_t addr;
  } detect_t;

  // Output of Repeat Detect towards the Memory Interface.
  typedef struct packed {
    logic  en;     // spec_en
    addr_t addr;   // spec_addr: CF_Log word offset to overwrite
    addr_t value;  // spec_value: sub-path ID or repetition count
  } spec_t;

  // Block Detect state machine (paper Fig. 4).
  typedef enum logic [1:0] {
    ST_IDLE    = 2'd0,
    ST_MONITOR = 2'd1,
    ST_DETECT  = 2'd2
  } bd_state_t;

endpackage
