// snapshot_manager: column-granularity snapshot chains for consistent analytical reads.
//
// Every column has a main replica (address and length, switched in one step when an
// update batch commits) and a chain of snapshots whose head is the newest one. A commit
// only switches the main pointer and marks the column dirty; no snapshot is taken then
// (lazy snapshotting). When an analytical query arrives for a column (qbegin):
//   - if the column is clean and has a head snapshot, the query shares that snapshot:
//     its reference count is raised and the answer is immediate;
//   - otherwise a free snapshot slot is taken, the column is marked clean, the copy unit
//     copies the main replica into the slot, and the slot becomes the new chain head
//     with one reference. The previous head, if no query uses it, is freed.
// When a query ends (qend) the slot's reference count drops; a slot with no reference
// that is not the head of its chain is freed (garbage collection). A commit that
// arrives while a snapshot of the same column is being copied marks the column dirty
// again, so the next query takes a fresh snapshot.
//
// Snapshot slot s lives at snap_base + s*SLOT_WORDS. The copy unit is used through a
// CP_COPY command with ID COPY_ID; its completion response ends the snapshot.
//
// From the paper: per-column versions, the dirty mark on update, lazy snapshot creation
// when a query arrives, sharing one snapshot between queries, deleting snapshots that no
// query uses except the chain head, atomic switch of the main replica pointer, and
// snapshot copies made by the in-memory copy unit. This design's own choices: doing this
// bookkeeping in a hardware controller, the slot pool and its sizes, reference counts,
// and the request/acknowledge handshakes.
//
// Interface: qbegin_valid/qbegin_col held until qbegin_ack, which returns the slot and
// address the query must read; qend_valid/qend_slot and commit_* are single-cycle
// strobes accepted in any cycle.
module snapshot_manager
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_COLS   = 16,
  parameter int unsigned NUM_SLOTS  = 16,
  parameter int unsigned SLOT_WORDS = 65536,
  parameter int unsigned COPY_ID    = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [ADDR_W-1:0]            snap_base,
  // query begin
  input  logic                         qbegin_valid,
  input  logic [$clog2(NUM_COLS)-1:0]  qbegin_col,
  output logic                         qbegin_ack,
  output logic [$clog2(NUM_SLOTS)-1:0] qbegin_slot,
  output logic [ADDR_W-1:0]            qbegin_addr,
  output logic                         qbegin_new,   // a snapshot was taken
  // query end
  input  logic                         qend_valid,
  input  logic [$clog2(NUM_SLOTS)-1:0] qend_slot,
  // update commit (phase 2 of update application)
  input  logic                         commit_valid,
  input  logic [$clog2(NUM_COLS)-1:0]  commit_col,
  input  logic [ADDR_W-1:0]            commit_addr,
  input  logic [ADDR_W-1:0]            commit_len,
  // copy unit
  output logic                         cmd_valid,
  input  logic                         cmd_ready,
  output copy_cmd_t                    cmd,
  input  logic                         rsp_valid,
  input  copy_rsp_t                    rsp,
  // status
  output logic [NUM_COLS-1:0]          dirty,
  output logic [NUM_SLOTS-1:0]         slot_used,
  output logic [31:0]                  gc_count
);
  localparam int unsigned KW = $clog2(NUM_COLS);
  localparam int unsigned SW = $clog2(NUM_SLOTS);
  localparam int unsigned RW = 16;

  typedef enum logic [1:0] {M_IDLE, M_ISSUE, M_WAIT} mstate_e;

  logic [ADDR_W-1:0] main_addr [NUM_COLS];
  logic [ADDR_W-1:0] main_len  [NUM_COLS];
  logic              has_head  [NUM_COLS];
  logic [SW-1:0]     head      [NUM_COLS];

  logic [RW-1:0]     refcnt    [NUM_SLOTS];
  logic              is_head   [NUM_SLOTS];

  mstate_e           mstate;
  logic [KW-1:0]     m_col;
  logic [SW-1:0]     m_slot;

  function automatic logic [ADDR_W-1:0] slot_addr(logic [ADDR_W-1:0] base, logic [SW-1:0] s);
    return base + ADDR_W'(s) * ADDR_W'(SLOT_WORDS);
  endfunction

  // free slot search
  logic          free_found;
  logic [SW-1:0] free_slot;
  always_comb begin
    free_found = 1'b0;
    free_slot  = '0;
    for (int s = NUM_SLOTS-1; s >= 0; s--)
      if (!slot_used[s]) begin
        free_found = 1'b1;
        free_slot  = SW'(s);
      end
  end

  logic share, copy_done;
  assign share     = (mstate == M_IDLE) && qbegin_valid && !dirty[qbegin_col] && has_head[qbegin_col];
  assign copy_done = (mstate == M_WAIT) && rsp_valid && rsp.id == ID_W'(COPY_ID);

  always_comb begin
    cmd       = '0;
    cmd_valid = (mstate == M_ISSUE);
    cmd.op    = CP_COPY;
    cmd.id    = ID_W'(COPY_ID);
    cmd.src   = main_addr[m_col];
    cmd.dst   = slot_addr(snap_base, m_slot);
    cmd.len   = main_len[m_col];
  end

  always_comb begin
    qbegin_ack  = 1'b0;
    qbegin_slot = '0;
    qbegin_addr = '0;
    qbegin_new  = 1'b0;
    if (share) begin
      qbegin_ack  = 1'b1;
      qbegin_slot = head[qbegin_col];
      qbegin_addr = slot_addr(snap_base, head[qbegin_col]);
    end else if (copy_done) begin
      qbegin_ack  = 1'b1;
      qbegin_slot = m_slot;
      qbegin_addr = slot_addr(snap_base, m_slot);
      qbegin_new  = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate   <= M_IDLE;
      m_col    <= '0;
      m_slot   <= '0;
      gc_count <= '0;
      for (int c = 0; c < NUM_COLS; c++) begin
        main_addr[c] <= '0;
        main_len[c]  <= '0;
        has_head[c]  <= 1'b0;
        head[c]      <= '0;
        dirty[c]     <= 1'b0;
      end
      for (int s = 0; s < NUM_SLOTS; s++) begin
        refcnt[s]    <= '0;
        is_head[s]   <= 1'b0;
        slot_used[s] <= 1'b0;
      end
    end else begin
      // reference counts: +1 for a shared or new snapshot, -1 for an ending query;
      // a slot that is neither referenced nor a chain head is freed
      begin
        int freed;
        freed = 0;
        for (int s = 0; s < NUM_SLOTS; s++) begin
          logic inc, dec, head_now;
          logic [RW-1:0] nref;
          inc      = (share && head[qbegin_col] == SW'(s)) || (copy_done && m_slot == SW'(s));
          dec      = qend_valid && qend_slot == SW'(s) && refcnt[s] != '0;
          nref     = refcnt[s] + (inc ? 1'b1 : 1'b0) - (dec ? 1'b1 : 1'b0);
          head_now = is_head[s];
          if (copy_done && m_slot == SW'(s)) head_now = 1'b1;
          else if (copy_done && has_head[m_col] && head[m_col] == SW'(s)) head_now = 1'b0;
          refcnt[s]  <= nref;
          is_head[s] <= head_now;
          if (slot_used[s] && !head_now && nref == '0 &&
              !(mstate != M_IDLE && m_slot == SW'(s))) begin
            slot_used[s] <= 1'b0;
            freed++;
          end
        end
        gc_count <= gc_count + 32'(freed);
      end

      // snapshot creation
      unique case (mstate)
        M_IDLE: if (qbegin_valid && !share && free_found) begin
          m_col                <= qbegin_col;
          m_slot               <= free_slot;
          slot_used[free_slot] <= 1'b1;
          dirty[qbegin_col]    <= 1'b0;
          mstate               <= M_ISSUE;
        end
        M_ISSUE: if (cmd_ready) mstate <= M_WAIT;
        M_WAIT: if (copy_done) begin
          has_head[m_col] <= 1'b1;
          head[m_col]     <= m_slot;
          mstate          <= M_IDLE;
        end
        default: mstate <= M_IDLE;
      endcase

      // phase 2 of an update: switch the main replica pointer and mark the column dirty
      if (commit_valid) begin
        main_addr[commit_col] <= commit_addr;
        main_len[commit_col]  <= commit_len;
        dirty[commit_col]     <= 1'b1;
      end
    end
  end

endmodule
