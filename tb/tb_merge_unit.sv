// tb_merge_unit: self-checking testbench of the update-log merge unit.
//
// Phase A: 1000 updates with unique commit IDs are dealt at random to the 8 thread logs
// (each log in increasing commit order) and pushed at full rate with the final log not
// drained; the final log must fill at one entry per cycle (within a few cycles of
// 1000) and pop out in commit-ID order. Phase B: 3000 updates with random push and pop
// stalls and logs finishing at different times. Every popped entry is compared, all
// fields, with the update the testbench expects next.
module tb_merge_unit;
  import polynesia_pkg::*;
  localparam int L = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic [L-1:0] in_valid, in_ready, log_done;
  log_entry_t   in_entry [L];
  logic         out_valid, out_ready, all_drained;
  log_entry_t   out_entry;
  logic [10:0]  final_count;

  int checks = 0, failures = 0;

  merge_unit dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic log_entry_t mk(int c);
    log_entry_t e;
    e.commit_id = 32'(c);
    e.typ       = (c % 3 == 0) ? UPD_INSERT : UPD_MODIFY;
    e.data      = 32'(c) * 32'd2654435761;
    e.col       = 16'(c % 13);
    e.row       = 32'(c * 7);
    return e;
  endfunction

  log_entry_t logs [L][$];
  int         expect_next;
  int         popped;

  task automatic deal(int base, int n);
    for (int k = 0; k < L; k++) logs[k].delete();
    for (int c = base; c < base + n; c++) logs[$urandom_range(L-1)].push_back(mk(c));
  endtask

  // pop side: compare every entry
  bit pop_random;
  always @(negedge clk) begin
    out_ready = pop_random ? ($urandom_range(3) != 0) : 1'b0;
  end
  always @(posedge clk) if (out_valid && out_ready) begin
    check(out_entry == mk(expect_next), $sformatf("entry %0d out of order (got commit %0d)", expect_next, out_entry.commit_id));
    expect_next++;
    popped++;
  end

  // push side: one process per log
  bit push_random;
  bit run_push;
  for (genvar g = 0; g < L; g++) begin : g_push
    always @(negedge clk) begin
      if (run_push && logs[g].size() != 0) begin
        if (in_valid[g] && in_ready_q[g]) void'(logs[g].pop_front());
      end
      if (run_push && logs[g].size() != 0 && (!push_random || $urandom_range(2) != 0)) begin
        in_valid[g] = 1'b1;
        in_entry[g] = logs[g][0];
      end else begin
        in_valid[g] = 1'b0;
      end
      log_done[g] = run_push && logs[g].size() == 0 && !in_valid[g];
    end
  end
  logic [L-1:0] in_ready_q;
  always @(posedge clk) in_ready_q <= in_ready;

  initial begin
    int cycles;
    in_valid = '0; log_done = '0; run_push = 0; push_random = 0; pop_random = 0;
    for (int k = 0; k < L; k++) in_entry[k] = '0;
    expect_next = 0; popped = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Phase A: full-rate merge into the final log
    deal(0, 1000);
    @(negedge clk) run_push = 1;
    cycles = 0;
    while (final_count != 11'd1000 && cycles < 5000) begin @(negedge clk); cycles++; end
    check(final_count == 11'd1000, "all 1000 merged");
    check(cycles <= 1004, $sformatf("merge rate: 1000 entries in %0d cycles", cycles));
    check(all_drained, "inputs drained");
    pop_random = 1;
    while (popped < 1000 && cycles < 20000) begin @(negedge clk); cycles++; end
    check(popped == 1000, "phase A all popped");
    run_push = 0;
    pop_random = 0;
    repeat (3) @(negedge clk);

    // Phase B: random stalls on both sides
    deal(1000, 3000);
    push_random = 1;
    @(negedge clk) run_push = 1;
    pop_random = 1;
    cycles = 0;
    while (popped < 4000 && cycles < 50000) begin @(negedge clk); cycles++; end
    check(popped == 4000, $sformatf("phase B all popped (%0d)", popped));
    check(!out_valid, "final log empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
