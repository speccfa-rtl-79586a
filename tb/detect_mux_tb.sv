// detect_mux_tb: self-checking test of the Block Detect output multiplexer.
//
// Drives random sets of Block Detect reports into an 8-input MUX and checks
// detect_any (OR of all active bits) and that ID and address come from the
// lowest-numbered active input, against a reference computed in the testbench.
// Directed cases: nothing active, one active input at each position, all
// inputs active.
module detect_mux_tb;
  import speccfa_pkg::*;

  localparam int N = 8;
  detect_t det [N];
  detect_t sel;
  int checks = 0, failures = 0;

  detect_mux #(.N_BLOCKS(N)) dut (.det(det), .sel(sel));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic compare(input string what);
    int first = -1;
    for (int i = N - 1; i >= 0; i--) if (det[i].active) first = i;
    #1;
    check(sel.active == (first >= 0), {what, " detect_any"});
    if (first >= 0) begin
      check(sel.id == det[first].id, {what, " active_ID"});
      check(sel.addr == det[first].addr, {what, " active_addr"});
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) det[i] = '{active: 1'b0, id: id_t'(i + 1), addr: addr_t'(100 * i)};
    compare("none");
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < N; i++) det[i].active = (i == j);
      compare($sformatf("single %0d", j));
    end
    for (int i = 0; i < N; i++) det[i].active = 1'b1;
    compare("all");
    check(sel.id == 8'd1 && sel.addr == 16'd0, "all -> input 0");
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < N; i++)
        det[i] = '{active: ($urandom_range(0, 5) == 0), id: id_t'($urandom), addr: addr_t'($urandom)};
      compare("random");
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
