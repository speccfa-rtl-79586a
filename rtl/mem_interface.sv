// mem_interface: applies a speculation result to CF_Log and CF_size.
//
// When spec_en is set, spec_value is written into CF_Log at word offset
// spec_addr and CF_size is set to spec_addr + 2, so the replacement becomes
// the last entry of the log (one entry = two 16-bit words). This is the
// paper's Memory Interface. A spec_addr outside the CF_Log region produces no
// write at all (this design's guard). Combinational: the writes happen at the
// clock edge that ends the detect cycle, inside the log storage.
module mem_interface
  import speccfa_pkg::*;
#(
  parameter int unsigned CFLOG_WORDS = 128
) (
  input  spec_t spec,
  output logic  log_we,
  output addr_t log_waddr,
  output addr_t log_wdata,
  output logic  size_we,
  output addr_t size_wdata
);

  logic in_range;
  assign in_range   = (32'(spec.addr) + 32'd2) <= 32'(CFLOG_WORDS);

  assign log_we     = spec.en && in_range;
  assign log_waddr  = spec.addr;
  assign log_wdata  = spec.value;
  assign size_we    = spec.en && in_range;
  assign size_wdata = spec.addr + addr_t'(2);

endmodule
