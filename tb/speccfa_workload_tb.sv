// speccfa_workload_tb: the design in the configuration of the paper's latency
// measurements (2 sub-path slots, 256-byte CF_Log slices), on two workloads.
//
// Part 1 replays the paper's introductory example. Sub-path ID 1 = (A, B, D, G)
// over the graph A..G, where each letter is the transfer that enters that
// node. The stream A B D G | A C D F G | A B D G | A B C D F G must leave the
// CF_Log entries
//   after A B D G          : 1
//   after A C D F G        : 1 A C D F G
//   after A B D G          : 1 A C D F G 1      (not adjacent: a new ID entry)
//   after A B C D F G      : 1 A C D F G 1 A B C D F G
//
// Part 2 is a synthetic sensor-style program: a busy-wait loop body (3
// transfers, repeated 5 to 30 times), then a measurement routine (5 transfers),
// then two unpredictable transfers, for 400 iterations. Both recurring paths
// are speculated. The testbench acts as the trusted software: when a slice is
// full it reads it out, expands every ID and count back into transfers (the
// verifier's side) and empties the log. The expanded stream must equal the
// transfers that were issued. It counts slices with speculation against the
// number the raw trace would need, and requires repeats and slice flushes to
// have happened.
module speccfa_workload_tb;
  import speccfa_pkg::*;

  localparam int NB = 2, LOGW = 128;
  localparam addr_t BM_BASE = 16'h0400;

  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  hw_en, w_en, dma_en, log_clear, log_full, log_overflow, reset_req;
  addr_t src, dest, pc, d_addr, d_wdata, dma_addr, log_raddr, log_rdata, cf_size;
  spec_t spec_out;

  speccfa_top #(.N_BLOCKS(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // a transfer entering node n: src = 0x8000 + 16n, dest = 0x9000 + 16n
  function automatic addr_t ns(input int n); return addr_t'(32'h8000 + 16 * n); endfunction
  function automatic addr_t nd(input int n); return addr_t'(32'h9000 + 16 * n); endfunction

  // speculations
  int    sp_len [NB];
  int    sp_id  [NB];
  int    sp_node [NB][8];

  task automatic cpu_write(input addr_t a, input addr_t v);
    pc = 16'hA100; w_en = 1; d_addr = a; d_wdata = v;
    @(posedge clk); #1;
    w_en = 0; pc = 16'h8000;
  endtask

  task automatic load_blockmem();
    int w;
    w = 0;
    for (int b = 0; b < NB; b++) begin
      cpu_write(addr_t'(32'(BM_BASE) + 2 * w), addr_t'({sp_id[b][7:0], sp_len[b][7:0]})); w++;
      for (int k = 0; k < sp_len[b]; k++) begin
        cpu_write(addr_t'(32'(BM_BASE) + 2 * w), ns(sp_node[b][k])); w++;
        cpu_write(addr_t'(32'(BM_BASE) + 2 * w), nd(sp_node[b][k])); w++;
      end
    end
    for (int k = 0; k < 8; k++) cpu_write(addr_t'(32'(BM_BASE) + 2 * (w + k)), 16'h0000);
  endtask

  // issued and reconstructed streams (as node numbers)
  int issued [$];
  int rebuilt [$];
  int n_slices, n_raw_words, n_ids, n_counts;

  // read the slice, expand it the way the verifier would, empty the log
  task automatic drain();
    int i, last_b, n;
    addr_t w0, w1;
    i = 0; last_b = -1;
    while (i < int'(cf_size)) begin
      log_raddr = addr_t'(i); #1 w0 = log_rdata;
      log_raddr = addr_t'(i + 1); #1 w1 = log_rdata;
      if (w0 >= 16'h8000) begin
        n = (int'(w0) - 32'h8000) / 16;
        check(w1 == nd(n), "plain entry src/dest agree");
        rebuilt.push_back(n);
        last_b = -1;
      end else begin
        int b;
        b = -1;
        for (int k = 0; k < NB; k++) if (int'(w0) == sp_id[k]) b = k;
        if (b >= 0 && last_b != b) begin
          for (int k = 0; k < sp_len[b]; k++) rebuilt.push_back(sp_node[b][k]);
          last_b = b; n_ids++;
        end else if (last_b >= 0 && w0 >= 2) begin
          // count c: c occurrences in total, one already expanded
          for (int r = 1; r < int'(w0); r++)
            for (int k = 0; k < sp_len[last_b]; k++) rebuilt.push_back(sp_node[last_b][k]);
          last_b = -1; n_counts++;
        end else begin
          check(0, $sformatf("undecodable word %h at %0d", w0, i));
        end
      end
      i += 2;
    end
    n_slices++;
    log_clear = 1; @(posedge clk); #1 log_clear = 0;
  endtask

  task automatic transfer(input int n);
    if (log_full) drain();
    hw_en = 1; src = ns(n); dest = nd(n);
    @(posedge clk); #1;
    hw_en = 0;
    issued.push_back(n);
    n_raw_words += 2;
    @(posedge clk); #1;
    repeat ($urandom_range(0, 3)) @(posedge clk);
    #1;
  endtask

  task automatic expect_entries(input int exp [$], input string what);
    check(int'(cf_size) == 2 * exp.size(), {what, ": CF_size"});
    for (int i = 0; i < exp.size(); i++) begin
      log_raddr = addr_t'(2 * i); #1;
      if (exp[i] < 0) check(log_rdata == addr_t'(-exp[i]), $sformatf("%s: entry %0d (ID)", what, i));
      else            check(log_rdata == ns(exp[i]), $sformatf("%s: entry %0d", what, i));
    end
  endtask

  localparam int A = 1, B = 2, C = 3, D = 4, E = 5, F = 6, G = 7;

  initial begin
    int exp [$];
    hw_en = 0; w_en = 0; dma_en = 0; log_clear = 0; src = 0; dest = 0;
    pc = 16'h8000; d_addr = 0; d_wdata = 0; dma_addr = 0; log_raddr = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---------------- part 1: the introductory example ----------------
    sp_id[0] = 1; sp_len[0] = 4; sp_node[0] = '{A, B, D, G, 0, 0, 0, 0};
    sp_id[1] = 0; sp_len[1] = 0;
    load_blockmem();
    for (int k = 0; k < 4; k++) transfer(sp_node[0][k]);
    exp = '{-1};
    expect_entries(exp, "example (b)");
    transfer(A); transfer(C); transfer(D); transfer(F); transfer(G);
    exp = '{-1, A, C, D, F, G};
    expect_entries(exp, "example (c)");
    transfer(A); transfer(B); transfer(D); transfer(G);
    exp = '{-1, A, C, D, F, G, -1};
    expect_entries(exp, "example (e)");
    transfer(A); transfer(B); transfer(C); transfer(D); transfer(F); transfer(G);
    exp = '{-1, A, C, D, F, G, -1, A, B, C, D, F, G};
    expect_entries(exp, "example (f)");
    log_clear = 1; @(posedge clk); #1 log_clear = 0;
    issued.delete();
    n_raw_words = 0;

    // ---------------- part 2: sensor-style loop program ----------------
    sp_id[0] = 'h21; sp_len[0] = 3; sp_node[0] = '{10, 11, 12, 0, 0, 0, 0, 0}; // busy-wait body
    sp_id[1] = 'h22; sp_len[1] = 5; sp_node[1] = '{20, 21, 22, 23, 24, 0, 0, 0}; // measurement
    load_blockmem();
    for (int it = 0; it < 400; it++) begin
      repeat ($urandom_range(5, 30)) for (int k = 0; k < 3; k++) transfer(sp_node[0][k]);
      for (int k = 0; k < 5; k++) transfer(sp_node[1][k]);
      transfer($urandom_range(30, 60));
      transfer($urandom_range(30, 60));
    end
    drain();

    check(rebuilt.size() == issued.size(), "reconstructed length");
    for (int i = 0; i < issued.size() && i < rebuilt.size(); i++)
      if (rebuilt[i] != issued[i]) begin
        check(0, $sformatf("reconstructed transfer %0d", i));
        break;
      end
    $display("transfers=%0d raw_slices=%0d slices_with_speculation=%0d id_entries=%0d count_entries=%0d",
             issued.size(), (n_raw_words + LOGW - 1) / LOGW, n_slices, n_ids, n_counts);
    check(n_counts > 0, "repeat counts were written");
    check(n_slices > 1, "more than one slice was sent");
    check(n_slices * 4 < (n_raw_words + LOGW - 1) / LOGW, "speculation needs under a quarter of the slices");
    check(!log_overflow && !reset_req, "no overflow, no monitor reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
