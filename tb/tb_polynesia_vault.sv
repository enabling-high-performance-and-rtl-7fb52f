// tb_polynesia_vault: end-to-end testbench of one vault's analytical-island logic, at the
// design's full default sizes (8 logs of 128-entry queues, 1024-entry final log, 1024
// hash buckets, 1024-value sorter, 2048-entry dictionaries, 16 snapshot slots).
//
// Story of the run:
//   1. Eight transactional threads stream 1500 updates (commit IDs dealt at random,
//      each thread's log sorted) into the vault. The (column,row) hash index in the
//      memory model has 4 columns of 300 rows in 1024 buckets, so every bucket that is
//      used chains the same row of the 4 columns; about one update in 12 names a row
//      that is not indexed. Checks: one full-log batch of 1024 updates and one flush
//      batch, and every column buffer holds its hits in commit order.
//   2. Before the threads start, an update application on column 3 (synthetic
//      dictionary and updates) commits; once the first batch is being shipped, a query
//      on column 3 takes a snapshot, so the snapshot copy competes with the hash lookups
//      for the copy unit.
//   3. The updates that were shipped into column 0's buffer are read back and applied to
//      column 0 (300 rows, old dictionary of 40 values): new dictionary, re-encoded
//      column and patches are checked against a reference model, and the decoded column
//      must equal the old one with the updates applied in commit order.
//   4. Queries on column 0: a new snapshot whose copy in memory equals the main replica,
//      a second query that shares it, a second small update that marks the column dirty,
//      a fresh snapshot for the next query, and garbage collection of the old snapshot
//      when its queries end.
// Every mechanism is counted, and one that never happened is a failure: full-log and
// flush triggers, hash misses, chain walks, out-of-order memory returns, dictionary
// duplicates removed, new snapshot, shared snapshot, dirty re-snapshot, garbage
// collection, and copy-unit contention between the two clients.
module tb_polynesia_vault;
  import polynesia_pkg::*;
  localparam int NL    = 8;
  localparam int NCOL  = 4;
  localparam int NROW  = 300;
  localparam int NUPD  = 1500;
  localparam int NB    = 1024;
  localparam int LANES = 4;
  localparam int CW    = 11;
  localparam logic [31:0] HASH_BASE = 32'h0001_0000;
  localparam logic [31:0] CHAIN_BASE = 32'h0002_0000;
  localparam logic [31:0] SNAP_BASE = 32'h0100_0000;
  localparam logic [31:0] MAIN3 = 32'h0008_0000;
  localparam logic [31:0] MAIN0A = 32'h0009_0000;
  localparam logic [31:0] MAIN0B = 32'h000a_0000;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic [ADDR_W-1:0]  hash_base, snap_base;
  logic               colbuf_clear;
  logic [NL-1:0]      log_valid, log_ready, log_done;
  log_entry_t         log_entry [NL];
  logic               mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [ADDR_W-1:0]  mem_rd_addr, mem_rsp_addr, mem_wr_addr;
  logic [DATA_W-1:0]  mem_rsp_data, mem_wr_data;
  logic               ua_start, ua_busy, ua_done;
  logic [3:0]         ua_col;
  logic [ADDR_W-1:0]  ua_new_addr;
  logic [11:0]        ua_old_len, ua_new_len, ua_new_bits;
  logic [10:0]        ua_upd_len;
  logic               dict_in_valid, dict_in_ready, upd_in_valid, upd_in_ready;
  logic [31:0]        dict_in_value, upd_in_row, upd_in_value;
  logic               dict_out_valid, dict_out_ready, dict_out_last;
  logic [31:0]        dict_out_value;
  logic               col_in_valid, col_in_ready, col_in_last, col_out_valid, col_out_ready, col_out_last;
  logic [LANES-1:0][CW-1:0] col_in_code, col_out_code;
  logic [LANES-1:0]   col_in_keep, col_out_keep;
  logic               patch_out_valid, patch_out_ready, patch_out_last;
  logic [31:0]        patch_out_row;
  logic [CW-1:0]      patch_out_code;
  logic               qbegin_valid, qbegin_ack, qbegin_new, qend_valid;
  logic [3:0]         qbegin_col, qbegin_slot, qend_slot;
  logic [ADDR_W-1:0]  qbegin_addr;
  logic               ship_valid, shipping, batch_done, copy_busy;
  logic [COLID_W-1:0] ship_col;
  logic [ADDR_W-1:0]  ship_addr;
  logic [31:0]        full_triggers, flush_triggers, shipped_count, miss_count, gc_count;
  logic [15:0]        col_dirty, slot_used;

  int checks = 0, failures = 0;

  polynesia_vault dut (.*);
  vault_mem_model u_mem (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [ADDR_W-1:0] colbuf(int c);
    return 32'h0004_0000 + 32'(c) * 32'h1000;
  endfunction

  // ---------------- mechanism monitors ----------------
  int chain_walks = 0, contention = 0, batches_done = 0;
  always @(posedge clk) begin
    if (mem_rd_valid && mem_rd_ready && mem_rd_addr >= CHAIN_BASE && mem_rd_addr < CHAIN_BASE + 32'h1_0000)
      chain_walks++;
    if (dut.sm_cmd_valid && dut.us_cmd_valid) contention++;
    if (batch_done) batches_done++;
  end

  always @(posedge clk) begin
    #1;
    dict_out_ready  = ($urandom_range(3) != 0);
    col_out_ready   = ($urandom_range(3) != 0);
    patch_out_ready = ($urandom_range(3) != 0);
  end

  // ---------------- thread log drivers ----------------
  log_entry_t thread_log [NL][$];
  log_entry_t exp_buf [NCOL][$];
  int exp_miss = 0;
  bit logs_go = 1'b0;

  for (genvar t = 0; t < NL; t++) begin : g_drv
    initial begin
      log_valid[t] = 1'b0;
      log_done[t]  = 1'b0;
      log_entry[t] = '0;
      wait (rst_n === 1'b0);
      wait (rst_n === 1'b1);
      wait (logs_go);
      @(negedge clk);
      foreach (thread_log[t][i]) begin
        bit ok;
        while ($urandom_range(5) == 0) @(negedge clk);
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

  // ---------------- update application and query helpers ----------------
  int dedup_seen = 0;

  // Applies updates (row, value) to a column of codes into dictionary od (sorted); checks
  // every output stream and returns the new dictionary and the decoded new column.
  task automatic apply(int col_id, logic [31:0] new_addr, int unsigned od [$], int unsigned col [$],
                       int unsigned urow [$], int unsigned uval [$], string tag);
    int unsigned nd [$], got_dict [$], got_col [$], got_prow [$], got_pcode [$], newcol [$], want [$];
    bit seen [int unsigned];
    int pos [int unsigned];
    int expbits, cycles, beat;
    nd.delete(); got_dict.delete(); got_col.delete(); got_prow.delete(); got_pcode.delete();
    newcol.delete(); want.delete(); seen.delete(); pos.delete();
    foreach (od[i]) seen[od[i]] = 1;
    nd = od;
    foreach (uval[i]) if (!seen.exists(uval[i])) begin seen[uval[i]] = 1; nd.push_back(uval[i]); end
    nd.sort();
    foreach (nd[i]) pos[nd[i]] = i;
    expbits = 1;
    while ((1 << expbits) < nd.size()) expbits++;
    if (od.size() + uval.size() > nd.size()) dedup_seen++;

    @(negedge clk);
    ua_old_len = 12'(od.size()); ua_upd_len = 11'(uval.size()); ua_col = 4'(col_id);
    ua_new_addr = new_addr; ua_start = 1;
    @(negedge clk) ua_start = 0;
    fork
      begin
        foreach (od[i]) begin
          dict_in_valid = 1; dict_in_value = od[i];
          forever begin bit ok; #1; ok = dict_in_ready; @(posedge clk); if (ok) break; @(negedge clk); end
          @(negedge clk);
        end
        dict_in_valid = 0;
        foreach (uval[i]) begin
          upd_in_valid = 1; upd_in_row = urow[i]; upd_in_value = uval[i];
          forever begin bit ok; #1; ok = upd_in_ready; @(posedge clk); if (ok) break; @(negedge clk); end
          @(negedge clk);
        end
        upd_in_valid = 0;
      end
      begin
        beat = 0;
        while (beat * LANES < col.size()) begin
          for (int l = 0; l < LANES; l++) begin
            int r;
            r = beat * LANES + l;
            col_in_keep[l] = (r < col.size());
            col_in_code[l] = (r < col.size()) ? CW'(col[r]) : '0;
          end
          col_in_last = ((beat + 1) * LANES >= col.size());
          col_in_valid = 1;
          forever begin bit ok; #1; ok = col_in_ready; @(posedge clk); if (ok) break; @(negedge clk); end
          @(negedge clk);
          beat++;
        end
        col_in_valid = 0;
      end
      begin
        cycles = 0;
        while (!ua_done && cycles < 200000) begin
          @(posedge clk);
          if (dict_out_valid && dict_out_ready) got_dict.push_back(dict_out_value);
          if (col_out_valid && col_out_ready)
            for (int l = 0; l < LANES; l++) if (col_out_keep[l]) got_col.push_back(col_out_code[l]);
          if (patch_out_valid && patch_out_ready) begin
            got_prow.push_back(patch_out_row);
            got_pcode.push_back(patch_out_code);
          end
          cycles++;
        end
      end
    join
    @(negedge clk);
    check(ua_new_len == 12'(nd.size()), $sformatf("%s: dictionary size %0d vs %0d", tag, ua_new_len, nd.size()));
    check(ua_new_bits == 12'(expbits), $sformatf("%s: code bits", tag));
    check(got_dict.size() == nd.size(), $sformatf("%s: dictionary stream", tag));
    foreach (nd[i]) check(i < got_dict.size() && got_dict[i] == nd[i], $sformatf("%s: dict[%0d]", tag, i));
    check(got_col.size() == col.size(), $sformatf("%s: column stream", tag));
    foreach (col[i]) check(i < got_col.size() && got_col[i] == pos[od[col[i]]], $sformatf("%s: row %0d re-encoded", tag, i));
    check(got_prow.size() == urow.size(), $sformatf("%s: patch count", tag));
    newcol = got_col;
    foreach (got_prow[i]) if (got_prow[i] < newcol.size()) newcol[got_prow[i]] = got_pcode[i];
    foreach (col[i]) want.push_back(od[col[i]]);
    foreach (urow[i]) want[urow[i]] = uval[i];
    foreach (want[i]) check(i < newcol.size() && newcol[i] < nd.size() && nd[newcol[i]] == want[i],
                            $sformatf("%s: decoded row %0d", tag, i));
    check(col_dirty[col_id], $sformatf("%s: commit marks the column dirty", tag));
    // the memory controller writes the new packed column: stand-in contents for the copy check
    for (int w = 0; w < (int'(col.size()) * expbits + 127) / 128; w++)
      u_mem.poke(new_addr + 32'(w), {$urandom, $urandom, $urandom, $urandom});
  endtask

  task automatic qbegin(int col, output int slot, output bit is_new, output logic [31:0] addr);
    bit ok;
    @(negedge clk);
    qbegin_valid = 1; qbegin_col = 4'(col);
    forever begin
      #1; ok = qbegin_ack; slot = int'(qbegin_slot); is_new = qbegin_new; addr = qbegin_addr;
      @(posedge clk);
      if (ok) break;
      @(negedge clk);
    end
    @(negedge clk) qbegin_valid = 0;
  endtask

  task automatic qend(int slot);
    @(negedge clk);
    qend_valid = 1; qend_slot = 4'(slot);
    @(negedge clk) qend_valid = 0;
  endtask

  function automatic bit same_words(logic [31:0] a, logic [31:0] b, int n);
    for (int i = 0; i < n; i++) if (u_mem.peek(a + 32'(i)) != u_mem.peek(b + 32'(i))) return 0;
    return 1;
  endfunction

  int snap_new = 0, snap_shared = 0, snap_dirty_again = 0;

  // ---------------- main sequence ----------------
  initial begin
    logic [ADDR_W-1:0] tail [NB];
    logic [ADDR_W-1:0] next_free;
    int unsigned od0 [$], col0 [$], urow0 [$], uval0 [$];
    int unsigned od3 [$], col3 [$], urow3 [$], uval3 [$];
    int s_a, s_b, s_c;
    bit nw;
    logic [31:0] ad;
    int cycles, words0;

    hash_base = HASH_BASE; snap_base = SNAP_BASE; colbuf_clear = 0;
    ua_start = 0; ua_col = 0; ua_new_addr = 0; ua_old_len = 0; ua_upd_len = 0;
    dict_in_valid = 0; upd_in_valid = 0; col_in_valid = 0; col_in_last = 0;
    dict_in_value = 0; upd_in_row = 0; upd_in_value = 0; col_in_code = '0; col_in_keep = '0;
    qbegin_valid = 0; qbegin_col = 0; qend_valid = 0; qend_slot = 0;

    // hash index: bucket words at HASH_BASE, further chain nodes at CHAIN_BASE
    next_free = CHAIN_BASE;
    for (int b = 0; b < NB; b++) tail[b] = '0;
    for (int c = 0; c < NCOL; c++)
      for (int r = 0; r < NROW; r++) begin
        hash_node_t n;
        int b;
        logic [ADDR_W-1:0] a;
        b = int'({16'(c), 32'(r)} % 48'(NB));
        n.valid = 1; n.col = 16'(c); n.row = 32'(r); n.target = colbuf(c); n.next = '0;
        if (tail[b] == '0) a = HASH_BASE + 32'(b);
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
    // thread logs: values drawn from a small set so that dictionaries see duplicates
    for (int i = 0; i < NUPD; i++) begin
      log_entry_t e;
      e.commit_id = 32'(100 + 2 * i);
      e.typ  = UPD_MODIFY;
      e.data = 32'(1000 * $urandom_range(60));
      e.col  = 16'($urandom_range(NCOL-1));
      e.row  = ($urandom_range(11) == 0) ? 32'(NROW + $urandom_range(500)) : 32'($urandom_range(NROW-1));
      thread_log[$urandom_range(NL-1)].push_back(e);
      if (e.row < NROW) exp_buf[e.col].push_back(e);
      else exp_miss++;
    end
    // column 3 (synthetic) and column 0 old state
    for (int i = 0; i < 40; i++) od0.push_back(32'(500 + 2000 * i));
    for (int r = 0; r < NROW; r++) col0.push_back($urandom_range(39));
    for (int i = 0; i < 16; i++) od3.push_back(32'(7 * i + 3));
    for (int r = 0; r < 500; r++) col3.push_back($urandom_range(15));
    for (int i = 0; i < 60; i++) begin
      urow3.push_back($urandom_range(499));
      uval3.push_back((i % 2 == 0) ? od3[$urandom_range(15)] : 32'(1000 + $urandom_range(30)));
    end

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1+2: shipping runs on its own; meanwhile column 3 is updated and queried
    apply(3, MAIN3, od3, col3, urow3, uval3, "column 3");
    logs_go = 1'b1;
    wait (shipping);
    repeat (20) @(negedge clk);
    qbegin(3, s_a, nw, ad);
    if (nw) snap_new++;
    words0 = (500 * int'(ua_new_bits) + 127) / 128;
    cycles = 0;
    while (copy_busy && cycles < 10000) begin @(negedge clk); cycles++; end
    check(nw, "query on updated column 3 takes a snapshot");
    check(same_words(ad, MAIN3, words0), "snapshot of column 3 equals its main replica");
    qend(s_a);

    cycles = 0;
    while (!(&log_done && !shipping && shipped_count + miss_count == 32'(NUPD)) && cycles < 300000) begin
      @(negedge clk);
      cycles++;
    end
    repeat (20) @(negedge clk);
    check(full_triggers == 32'd1, $sformatf("one full-log batch (%0d)", full_triggers));
    check(flush_triggers >= 32'd1, $sformatf("flush batch (%0d)", flush_triggers));
    check(32'(batches_done) == full_triggers + flush_triggers, "one batch_done per batch");
    check(shipped_count == 32'(NUPD - exp_miss), $sformatf("shipped %0d", shipped_count));
    check(miss_count == 32'(exp_miss), $sformatf("misses %0d vs %0d", miss_count, exp_miss));
    for (int c = 0; c < NCOL; c++) begin
      foreach (exp_buf[c][k])
        check(log_entry_t'(u_mem.peek(colbuf(c) + 32'(k))[$bits(log_entry_t)-1:0]) == exp_buf[c][k],
              $sformatf("column %0d buffer slot %0d", c, k));
      check(u_mem.peek(colbuf(c) + 32'(exp_buf[c].size())) == '0, $sformatf("column %0d buffer length", c));
    end

    // 3: apply the shipped updates of column 0, read back from its column buffer
    for (int k = 0; ; k++) begin
      log_entry_t e;
      e = log_entry_t'(u_mem.peek(colbuf(0) + 32'(k))[$bits(log_entry_t)-1:0]);
      if (e.commit_id == '0) break;
      urow0.push_back(e.row);
      uval0.push_back(e.data);
    end
    check(urow0.size() == exp_buf[0].size() && urow0.size() <= 1024, "column 0 batch read back");
    apply(0, MAIN0A, od0, col0, urow0, uval0, "column 0");
    words0 = (NROW * int'(ua_new_bits) + 127) / 128;

    // 4: queries on column 0
    qbegin(0, s_a, nw, ad);
    if (nw) snap_new++;
    cycles = 0;
    while (copy_busy && cycles < 10000) begin @(negedge clk); cycles++; end
    check(nw && same_words(ad, MAIN0A, words0), "snapshot of column 0 equals its main replica");
    check(!col_dirty[0], "column 0 clean after its snapshot");
    qbegin(0, s_b, nw, ad);
    if (!nw && s_b == s_a) snap_shared++;
    check(!nw && s_b == s_a, "second query shares the snapshot");
    begin
      int unsigned od1 [$], c1 [$], r1 [$], v1 [$];
      od1 = {32'd10, 32'd20, 32'd30};
      for (int r = 0; r < 50; r++) c1.push_back($urandom_range(2));
      r1 = {32'd4, 32'd9};
      v1 = {32'd20, 32'd25};
      apply(0, MAIN0B, od1, c1, r1, v1, "column 0 second update");
      words0 = (50 * int'(ua_new_bits) + 127) / 128;
    end
    qbegin(0, s_c, nw, ad);
    if (nw && s_c != s_a) snap_dirty_again++;
    cycles = 0;
    while (copy_busy && cycles < 10000) begin @(negedge clk); cycles++; end
    check(nw && s_c != s_a, "dirty column: the next query gets a fresh snapshot");
    check(same_words(ad, MAIN0B, words0), "fresh snapshot copies the new main replica");
    check(slot_used[s_a], "old snapshot kept while its queries run");
    qend(s_a);
    qend(s_b);
    @(negedge clk);
    check(!slot_used[s_a] && slot_used[s_c], "old snapshot collected, head kept");
    qend(s_c);

    // mechanism counts
    $display("mechanisms: full=%0d flush=%0d miss=%0d chain=%0d ooo=%0d dedup=%0d new=%0d shared=%0d dirty=%0d gc=%0d contention=%0d",
             full_triggers, flush_triggers, miss_count, chain_walks, u_mem.ooo, dedup_seen, snap_new,
             snap_shared, snap_dirty_again, gc_count, contention);
    check(full_triggers > 0, "mechanism: full-log trigger");
    check(flush_triggers > 0, "mechanism: flush trigger");
    check(miss_count > 0, "mechanism: hash miss");
    check(chain_walks > 0, "mechanism: hash chain walk");
    check(u_mem.ooo > 0, "mechanism: out-of-order memory return");
    check(dedup_seen > 0, "mechanism: dictionary duplicate removal");
    check(snap_new > 0, "mechanism: new snapshot");
    check(snap_shared > 0, "mechanism: shared snapshot");
    check(snap_dirty_again > 0, "mechanism: re-snapshot of a dirty column");
    check(gc_count > 0, "mechanism: snapshot garbage collection");
    check(contention > 0, "mechanism: copy-unit contention between clients");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
