// mem_interface_tb: self-checking test of the Memory Interface.
//
// For random speculation results checks that a CF_Log word write of spec_value
// at spec_addr and a CF_size write of spec_addr + 2 are issued exactly when
// spec_en is set and the entry lies in_log a 128-word CF_Log, and nothing
// otherwise.
module mem_interface_tb;
  import speccfa_pkg::*;

  spec_t spec;
  logic  log_we, size_we;
  addr_t log_waddr, log_wdata, size_wdata;
  int checks = 0, failures = 0;

  mem_interface #(.CFLOG_WORDS(128)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s addr=%0d", what, spec.addr); end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      bit in_log;
      spec.en    = $urandom_range(0, 1);
      spec.addr  = (n % 3 == 0) ? addr_t'($urandom) : addr_t'($urandom_range(0, 130));
      spec.value = addr_t'($urandom);
      in_log = (int'(spec.addr) <= 126);
      #1;
      check(log_we == (spec.en && in_log), "log_we");
      check(size_we == (spec.en && in_log), "size_we");
      if (spec.en && in_log) begin
        check(log_waddr == spec.addr, "log_waddr");
        check(log_wdata == spec.value, "log_wdata");
        check(size_wdata == addr_t'(int'(spec.addr) + 2), "size_wdata");
      end
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
