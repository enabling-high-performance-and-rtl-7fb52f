// tb_update_shipping_unit: self-checking testbench of the update gathering and shipping unit.
//
// Eight thread logs, each sorted by commit ID, carry 400 updates whose commit IDs are
// dealt out at random between the threads. The final log is reduced to 64 entries
// (FINAL_DEPTH override) and the input queues to 16, so that several full-log batches
// happen within one run and the end of the run is shipped by the flush trigger. The
// (column,row) hash index lives in the memory model (64 buckets, chained), the unit
// reaches memory through a real copy unit, and the memory answers out of order.
// Checks: both trigger kinds fired, one batch_done per trigger, every hit update is in
// its column buffer in global commit order, ship and miss counts, and that the memory
// did return reads out of order.
module tb_update_shipping_unit;
  import polynesia_pkg::*;
  localparam int NL    = 8;
  localparam int FD    = 64;
  localparam int NB    = 64;
  localparam int NCOL  = 5;
  localparam int NROW  = 60;
  localparam int NUPD  = 400;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic [ADDR_W-1:0]  hash_base;
  logic               colbuf_clear;
  logic [NL-1:0]      log_valid, log_ready, log_done;
  log_entry_t         log_entry [NL];
  logic               cmd_valid, cmd_ready, rsp_valid, ship_valid, shipping, batch_done;
  copy_cmd_t          cmd;
  copy_rsp_t          rsp;
  logic [COLID_W-1:0] ship_col;
  logic [ADDR_W-1:0]  ship_addr;
  logic [31:0]        full_triggers, flush_triggers, shipped_count, miss_count;
  logic               cu_busy;
  logic               mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [ADDR_W-1:0]  mem_rd_addr, mem_rsp_addr, mem_wr_addr;
  logic [DATA_W-1:0]  mem_rsp_data, mem_wr_data;

  int checks = 0, failures = 0;

  update_shipping_unit #(.NUM_LOGS(NL), .IN_DEPTH(16), .FINAL_DEPTH(FD), .NUM_BUCKETS(NB)) dut (.*);
  copy_unit u_cu (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp,
                  .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_addr,
                  .mem_rsp_data, .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
                  .busy(cu_busy));
  vault_mem_model u_mem (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [ADDR_W-1:0] colbuf(int c);
    return 32'h10000 + 32'(c) * 32'h1000;
  endfunction

  // bookkeeping of batches and ship pulses
  int batches_done = 0, ship_pulses = 0;
  always @(posedge clk) begin
    if (batch_done) batches_done++;
    if (ship_valid) ship_pulses++;
  end

  log_entry_t thread_log [NL][$];
  log_entry_t exp_buf [NCOL][$];
  int exp_miss = 0;

  // one driver per thread log, random gaps
  for (genvar t = 0; t < NL; t++) begin : g_drv
    initial begin
      log_valid[t] = 1'b0;
      log_done[t]  = 1'b0;
      log_entry[t] = '0;
      wait (rst_n === 1'b0);
      wait (rst_n === 1'b1);
      #1;
      @(negedge clk);
      foreach (thread_log[t][i]) begin
        bit ok;
        while ($urandom_range(4) == 0) @(negedge clk);
        log_valid[t] = 1'b1;
        log_entry[t] = thread_log[t][i];
        forever begin
          #1; ok = log_ready[t];
          @(posedge clk);
          if (ok) break;
          @(negedge clk);
        end
        @(negedge clk);
        log_valid[t] = 1'b0;
      end
      log_done[t] = 1'b1;
    end
  end

  initial begin
    logic [ADDR_W-1:0] tail [NB];
    logic [ADDR_W-1:0] next_free;
    int cycles;
    hash_base = 32'h400;
    colbuf_clear = 0;
    next_free = 32'h4000;
    for (int b = 0; b < NB; b++) tail[b] = '0;
    for (int c = 0; c < NCOL; c++)
      for (int r = 0; r < NROW; r++) begin
        hash_node_t n;
        int b;
        logic [ADDR_W-1:0] a;
        b = int'({16'(c), 32'(r)} % 48'(NB));
        n.valid = 1; n.col = 16'(c); n.row = 32'(r); n.target = colbuf(c); n.next = '0;
        if (tail[b] == '0) a = hash_base + 32'(b);
        else begin
          hash_node_t tn;
          a = next_free;
          next_free++;
          tn = hash_node_t'(u_mem.peek(tail[b])[$bits(hash_node_t)-1:0]);
          tn.next = a;
          u_mem.poke(tail[b], 128'(tn));
        end
        u_mem.poke(a, 128'(n));
        tail[b] = a;
      end
    // commit IDs 0..NUPD-1 dealt to random threads; each thread log stays sorted
    for (int i = 0; i < NUPD; i++) begin
      log_entry_t e;
      e.commit_id = 32'(5 + 3 * i);
      e.typ  = upd_type_e'($urandom_range(2));
      e.data = $urandom;
      e.col  = 16'($urandom_range(NCOL-1));
      e.row  = ($urandom_range(11) == 0) ? 32'(NROW + $urandom_range(99)) : 32'($urandom_range(NROW-1));
      thread_log[$urandom_range(NL-1)].push_back(e);
      if (e.row < NROW) exp_buf[e.col].push_back(e);
      else exp_miss++;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    cycles = 0;
    while (!(&log_done && !shipping && full_triggers + flush_triggers == 32'(batches_done)
             && shipped_count + miss_count == 32'(NUPD)) && cycles < 100000) begin
      @(negedge clk);
      cycles++;
    end
    repeat (20) @(negedge clk);

    check(full_triggers > 0, $sformatf("full-log trigger fired %0d times", full_triggers));
    check(flush_triggers > 0, $sformatf("flush trigger fired %0d times", flush_triggers));
    check(32'(batches_done) == full_triggers + flush_triggers,
          $sformatf("batch_done %0d vs triggers %0d", batches_done, full_triggers + flush_triggers));
    check(full_triggers + flush_triggers >= 32'(NUPD / FD), "batch count");
    check(shipped_count == 32'(NUPD - exp_miss), $sformatf("shipped %0d", shipped_count));
    check(miss_count == 32'(exp_miss), $sformatf("misses %0d vs %0d", miss_count, exp_miss));
    check(ship_pulses == NUPD - exp_miss, $sformatf("ship pulses %0d", ship_pulses));
    for (int c = 0; c < NCOL; c++) begin
      foreach (exp_buf[c][k])
        check(log_entry_t'(u_mem.peek(colbuf(c) + 32'(k))[$bits(log_entry_t)-1:0]) == exp_buf[c][k],
              $sformatf("column %0d buffer slot %0d", c, k));
      check(u_mem.peek(colbuf(c) + 32'(exp_buf[c].size())) == '0, $sformatf("column %0d buffer length", c));
    end
    check(u_mem.ooo > 0, "memory returned reads out of order");
    $display("batches: %0d full, %0d flush, %0d cycles", full_triggers, flush_triggers, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
