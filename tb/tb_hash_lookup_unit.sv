// tb_hash_lookup_unit: self-checking testbench of the hash lookup unit.
//
// The testbench builds a (column,row) hash index in a memory model: 16 buckets (a
// reduced NUM_BUCKETS so that chains are long), each bucket word the head node of a
// linked list, column buffer of column c at 0x10000 + c*0x1000. The unit reaches memory
// through a real copy unit, and the memory model returns reads out of order, so probe
// units finish out of order. 600 final-log entries are fed with random stalls; about one
// in ten has a key that is not in the index. Checks: every column buffer holds exactly
// the hits of its column in commit order, the miss and ship counts, that lookups did
// finish out of order (a probe unit completed while an older lookup was still pending),
// and that colbuf_clear restarts the buffers.
module tb_hash_lookup_unit;
  import polynesia_pkg::*;
  localparam int NB    = 16;
  localparam int NCOL  = 6;
  localparam int NROW  = 40;
  localparam int NUPD  = 600;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic              in_valid, in_ready, cmd_valid, cmd_ready, rsp_valid, ship_valid, busy;
  logic              colbuf_clear;
  log_entry_t        in_entry;
  copy_cmd_t         cmd;
  copy_rsp_t         rsp;
  logic [COLID_W-1:0] ship_col;
  logic [ADDR_W-1:0] ship_addr, hash_base;
  logic [31:0]       shipped_count, miss_count;
  logic              cu_busy;
  logic              mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [ADDR_W-1:0] mem_rd_addr, mem_rsp_addr, mem_wr_addr;
  logic [DATA_W-1:0] mem_rsp_data, mem_wr_data;

  int checks = 0, failures = 0;

  hash_lookup_unit #(.NUM_BUCKETS(NB)) dut (.*);
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

  // out-of-order completion: a probe result written to a ROB entry other than the head
  int ooo_done = 0;
  always @(posedge clk)
    for (int p = 0; p < 4; p++)
      if (dut.p_state[p] == 2'd2 && rsp_valid && rsp.id == 4'(p) && dut.p_rob[p] != dut.rob_head) begin
        hash_node_t n;
        n = hash_node_t'(rsp.data[$bits(hash_node_t)-1:0]);
        if (n.valid && {n.col, n.row} == dut.p_key[p]) ooo_done++;
      end

  log_entry_t ups [$];
  log_entry_t exp_buf [NCOL][$];
  int exp_miss;

  initial begin
    logic [ADDR_W-1:0] tail [NB];
    logic [ADDR_W-1:0] next_free;
    int cycles;
    hash_base = 32'h100;
    in_valid = 0; in_entry = '0; colbuf_clear = 0;
    // build the hash index
    next_free = 32'h2000;
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
          hash_node_t t;
          a = next_free;
          next_free++;
          t = hash_node_t'(u_mem.peek(tail[b])[$bits(hash_node_t)-1:0]);
          t.next = a;
          u_mem.poke(tail[b], 128'(t));
        end
        u_mem.poke(a, 128'(n));
        tail[b] = a;
      end
    // updates
    exp_miss = 0;
    for (int i = 0; i < NUPD; i++) begin
      log_entry_t e;
      e.commit_id = 32'(1000 + i);
      e.typ = UPD_MODIFY;
      e.data = $urandom;
      e.col = 16'($urandom_range(NCOL-1));
      e.row = ($urandom_range(9) == 0) ? 32'(NROW + $urandom_range(50)) : 32'($urandom_range(NROW-1));
      ups.push_back(e);
      if (e.row < NROW) exp_buf[e.col].push_back(e);
      else exp_miss++;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    foreach (ups[i]) begin
      bit ok;
      while ($urandom_range(3) == 0) @(negedge clk);
      in_valid = 1; in_entry = ups[i];
      forever begin
        #1; ok = in_ready;
        @(posedge clk);
        if (ok) break;
        @(negedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
    cycles = 0;
    while ((busy || cu_busy) && cycles < 20000) begin @(negedge clk); cycles++; end
    repeat (5) @(negedge clk);

    check(shipped_count == 32'(NUPD - exp_miss), $sformatf("shipped %0d", shipped_count));
    check(miss_count == 32'(exp_miss), $sformatf("misses %0d vs %0d", miss_count, exp_miss));
    for (int c = 0; c < NCOL; c++) begin
      foreach (exp_buf[c][k])
        check(log_entry_t'(u_mem.peek(colbuf(c) + 32'(k))[$bits(log_entry_t)-1:0]) == exp_buf[c][k],
              $sformatf("column %0d buffer slot %0d", c, k));
      check(u_mem.peek(colbuf(c) + 32'(exp_buf[c].size())) == '0, $sformatf("column %0d buffer length", c));
    end
    check(ooo_done > 0, $sformatf("lookups completed out of order (%0d)", ooo_done));

    // clear the column buffers and ship one more update
    @(negedge clk) colbuf_clear = 1;
    @(negedge clk) colbuf_clear = 0;
    begin
      log_entry_t e;
      bit ok;
      e = exp_buf[2][0];
      e.commit_id = 32'd99999;
      in_valid = 1; in_entry = e;
      forever begin #1; ok = in_ready; @(posedge clk); if (ok) break; @(negedge clk); end
      @(negedge clk) in_valid = 0;
      cycles = 0;
      while ((busy || cu_busy) && cycles < 2000) begin @(negedge clk); cycles++; end
      repeat (5) @(negedge clk);
      check(log_entry_t'(u_mem.peek(colbuf(2))[$bits(log_entry_t)-1:0]) == e, "buffer restarts after clear");
    end
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
