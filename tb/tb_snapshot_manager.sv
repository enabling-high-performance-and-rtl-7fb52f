// tb_snapshot_manager: self-checking testbench of the snapshot manager.
//
// The copy unit is modelled by the testbench: it accepts CP_COPY commands (with random
// delay), records them, and answers with the command's ID after a random time. A
// scripted sequence exercises: first snapshot of a column, sharing a clean snapshot,
// a commit marking the column dirty and forcing a new snapshot, garbage collection of
// an unreferenced old snapshot at query end and at head replacement, a commit that
// arrives during the copy (column must stay dirty), and a query waiting while all slots
// are in use. Every acknowledge, copy command, dirty bit, slot-use bit and the
// garbage-collection count is compared with the value the sequence implies.
module tb_snapshot_manager;
  import polynesia_pkg::*;
  localparam int NS    = 4;
  localparam int SLOTW = 1024;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic [ADDR_W-1:0] snap_base;
  logic              qbegin_valid, qbegin_ack, qbegin_new, qend_valid, commit_valid;
  logic [3:0]        qbegin_col, commit_col;
  logic [1:0]        qbegin_slot, qend_slot;
  logic [ADDR_W-1:0] qbegin_addr, commit_addr, commit_len;
  logic              cmd_valid, cmd_ready, rsp_valid;
  copy_cmd_t         cmd;
  copy_rsp_t         rsp;
  logic [15:0]       dirty;
  logic [NS-1:0]     slot_used;
  logic [31:0]       gc_count;

  int checks = 0, failures = 0;

  snapshot_manager #(.NUM_COLS(16), .NUM_SLOTS(NS), .SLOT_WORDS(SLOTW)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // copy unit model
  copy_cmd_t copies [$];
  int        pend_due = -1;
  logic [ID_W-1:0] pend_id;
  int        cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd_ready) begin
      copies.push_back(cmd);
      pend_due = cyc + 5 + $urandom_range(20);
      pend_id  = cmd.id;
    end
  end
  always @(posedge clk) begin
    #1;
    cmd_ready = ($urandom_range(2) != 0) && pend_due < 0;
    rsp_valid = 1'b0;
    rsp       = '0;
    if (pend_due >= 0 && cyc >= pend_due) begin
      rsp_valid = 1'b1;
      rsp.id    = pend_id;
      pend_due  = -1;
    end
  end

  // query begin: returns slot and whether a snapshot was taken
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
    qend_valid = 1; qend_slot = 2'(slot);
    @(negedge clk) qend_valid = 0;
  endtask

  task automatic commit(int col, logic [31:0] a, logic [31:0] len);
    @(negedge clk);
    commit_valid = 1; commit_col = 4'(col); commit_addr = a; commit_len = len;
    @(negedge clk) commit_valid = 0;
  endtask

  initial begin
    int s0, s1, s2, s3, s4, sx;
    bit nw;
    logic [31:0] ad;
    snap_base = 32'h40000;
    qbegin_valid = 0; qbegin_col = 0; qend_valid = 0; qend_slot = 0;
    commit_valid = 0; commit_col = 0; commit_addr = 0; commit_len = 0;
    cmd_ready = 0; rsp_valid = 0; rsp = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    commit(0, 32'h5000, 32'd100);
    check(dirty[0], "commit marks column 0 dirty");
    qbegin(0, s0, nw, ad);
    check(nw, "first query on column 0 takes a snapshot");
    check(ad == snap_base + 32'(s0 * SLOTW), "snapshot address");
    check(copies.size() == 1 && copies[0].op == CP_COPY && copies[0].src == 32'h5000 &&
          copies[0].dst == ad && copies[0].len == 32'd100 && copies[0].id == 4'd8, "copy command of snapshot 0");
    check(!dirty[0], "column clean after snapshot");

    qbegin(0, s1, nw, ad);
    check(!nw && s1 == s0, "clean column: query shares the head snapshot");
    check(copies.size() == 1, "no copy for a shared snapshot");

    commit(0, 32'h6000, 32'd120);
    qbegin(0, s2, nw, ad);
    check(nw && s2 != s0, "dirty column: new snapshot");
    check(copies.size() == 2 && copies[1].src == 32'h6000 && copies[1].len == 32'd120, "copy from the new main replica");
    check(slot_used[s0], "old snapshot kept while queries use it");
    qend(s0);
    check(slot_used[s0], "old snapshot kept with one query left");
    qend(s0);
    @(negedge clk);
    check(!slot_used[s0] && gc_count == 32'd1, "old snapshot collected when its last query ends");

    qend(s2);
    @(negedge clk);
    check(slot_used[s2], "head snapshot is never collected");

    commit(0, 32'h7000, 32'd8);
    qbegin(0, s3, nw, ad);
    check(nw, "third snapshot");
    @(negedge clk);
    check(!slot_used[s2] && gc_count == 32'd2, "unreferenced old head collected when replaced");

    // commit during the copy of column 1
    commit(1, 32'h9000, 32'd50);
    fork
      qbegin(1, s4, nw, ad);
      begin
        wait (copies.size() == 4);
        commit(1, 32'ha000, 32'd60);
      end
    join
    check(nw, "snapshot of column 1");
    check(dirty[1], "commit during the copy leaves column 1 dirty");
    qbegin(1, sx, nw, ad);
    check(nw && sx != s4, "next query on column 1 takes a fresh snapshot");
    check(copies[copies.size()-1].src == 32'ha000, "fresh snapshot copies the latest replica");

    // all slots in use: s3 (col 0 head, 1 ref), s4 (1 ref), sx (col 1 head, 1 ref) + one more
    commit(2, 32'hb000, 32'd4);
    qbegin(2, s0, nw, ad);
    check(&slot_used, "all slots in use");
    commit(3, 32'hc000, 32'd4);
    fork
      qbegin(3, s1, nw, ad);
      begin
        repeat (40) @(negedge clk);
        check(!qbegin_ack && copies.size() == 6, "query waits for a free slot");
        qend(s4);
      end
    join
    check(nw && s1 == s4, "query proceeds in the freed slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
