// hash_lookup_unit: finds the column buffer of every final-log update and writes the
// update there, in commit order.
//
// The analytical replica keeps a hash index on the record key (column ID, row ID).
// The hash function is the key modulo NUM_BUCKETS; bucket b is the memory word at
// hash_base + b and holds the first node of the bucket's linked list (hash_node_t),
// further nodes are reached through 'next' (zero ends the list).
//
// Structure, following the architecture figure of the update gathering and shipping
// unit: a front-end engine takes one final-log entry per cycle, hashes its key into
// the bucket address, allocates a reorder-buffer (ROB) entry holding the update, the
// bucket address and a ready bit, and hands the lookup to a free probe unit. Each of
// NUM_PROBES probe units is a small FSM that walks the bucket's list by issuing reads
// to the copy unit until it finds the key or the end of the list. It then fills in its
// ROB entry (column-buffer base address, hit/miss) and sets the ready bit. The ROB
// retires strictly in allocation order, so updates reach the column buffers in the
// order the transactional engine committed them, although lookups finish out of order.
// A retiring hit issues a copy-unit write of the whole log entry to the next free slot
// of its column buffer (base + fill count of the column); a miss (key not in the index)
// is dropped and counted.
//
// From the paper: the modulo hash, bucket hashing with separate chaining in memory, the
// front-end FSM, four probe units, the reorder buffer and the issue of reads and writes
// through the copy unit. This design's own choices: ROB_DEPTH, NUM_BUCKETS, the node
// format, the per-column fill counters (COLBUF_N of them, indexed by the low bits of the
// column ID), dropping misses, and write priority over probe reads on the copy port.
//
// Copy-unit port: one command per cycle (valid-ready). Probe p reads with ID p and
// takes the response whose ID is p. Writes use ID NUM_PROBES and get no response.
module hash_lookup_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_PROBES  = 4,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024,
  parameter int unsigned COLBUF_N    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] hash_base,
  input  logic              colbuf_clear,
  // final log
  input  logic              in_valid,
  output logic              in_ready,
  input  log_entry_t        in_entry,
  // copy unit
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output copy_cmd_t         cmd,
  input  logic              rsp_valid,
  input  copy_rsp_t         rsp,
  // shipped updates (one per retired hit)
  output logic              ship_valid,
  output logic [COLID_W-1:0] ship_col,
  output logic [ADDR_W-1:0] ship_addr,
  output logic [31:0]       shipped_count,
  output logic [31:0]       miss_count,
  output logic              busy
);
  localparam int unsigned RW = $clog2(ROB_DEPTH);
  localparam int unsigned PW = (NUM_PROBES > 1) ? $clog2(NUM_PROBES) : 1;
  localparam int unsigned CW = $clog2(COLBUF_N);

  typedef struct packed {
    logic              busy;
    logic              ready;
    logic              hit;
    log_entry_t        entry;
    logic [ADDR_W-1:0] bucket_addr;
    logic [ADDR_W-1:0] target;
  } rob_t;

  typedef enum logic [1:0] {P_IDLE, P_REQ, P_WAIT} pstate_e;

  rob_t              rob [ROB_DEPTH];
  logic [RW-1:0]     rob_head, rob_tail;
  logic [RW:0]       rob_cnt;

  pstate_e           p_state [NUM_PROBES];
  logic [RW-1:0]     p_rob   [NUM_PROBES];
  logic [ADDR_W-1:0] p_addr  [NUM_PROBES];
  logic [KEY_W-1:0]  p_key   [NUM_PROBES];

  logic [ADDR_W-1:0] fill [COLBUF_N];

  // ---------------- front-end engine ----------------
  logic [ADDR_W-1:0] fe_bucket;
  logic              free_found;
  logic [PW-1:0]     free_probe;
  logic              fe_go;

  assign fe_bucket = hash_base + ADDR_W'(entry_key(in_entry) % KEY_W'(NUM_BUCKETS));

  always_comb begin
    free_found = 1'b0;
    free_probe = '0;
    for (int p = NUM_PROBES-1; p >= 0; p--)
      if (p_state[p] == P_IDLE) begin
        free_found = 1'b1;
        free_probe = PW'(p);
      end
  end

  assign in_ready = free_found && (rob_cnt < (RW+1)'(ROB_DEPTH));
  assign fe_go    = in_valid && in_ready;

  // ---------------- retire / command arbitration ----------------
  rob_t          head;
  logic          retire_hit, retire_miss, wr_fire;
  logic [CW-1:0] head_cb;
  logic          rd_found;
  logic [PW-1:0] rd_probe;
  logic          rd_fire;

  assign head        = rob[rob_head];
  assign head_cb     = head.entry.col[CW-1:0];
  assign retire_hit  = head.busy && head.ready && head.hit;
  assign retire_miss = head.busy && head.ready && !head.hit;

  always_comb begin
    rd_found = 1'b0;
    rd_probe = '0;
    for (int p = NUM_PROBES-1; p >= 0; p--)
      if (p_state[p] == P_REQ) begin
        rd_found = 1'b1;
        rd_probe = PW'(p);
      end
  end

  always_comb begin
    cmd       = '0;
    cmd_valid = 1'b0;
    if (retire_hit) begin
      cmd_valid = 1'b1;
      cmd.op    = CP_WRITE;
      cmd.id    = ID_W'(NUM_PROBES);
      cmd.dst   = head.target + fill[head_cb];
      cmd.len   = ADDR_W'(1);
      cmd.wdata = DATA_W'(head.entry);
    end else if (rd_found) begin
      cmd_valid = 1'b1;
      cmd.op    = CP_READ;
      cmd.id    = ID_W'(rd_probe);
      cmd.src   = p_addr[rd_probe];
      cmd.len   = ADDR_W'(1);
    end
  end

  assign wr_fire = retire_hit && cmd_ready;
  assign rd_fire = !retire_hit && rd_found && cmd_ready;

  assign ship_valid = wr_fire;
  assign ship_col   = head.entry.col;
  assign ship_addr  = cmd.dst;
  assign busy       = (rob_cnt != '0);

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rob_head      <= '0;
      rob_tail      <= '0;
      rob_cnt       <= '0;
      shipped_count <= '0;
      miss_count    <= '0;
      for (int r = 0; r < ROB_DEPTH; r++) rob[r] <= '0;
      for (int p = 0; p < NUM_PROBES; p++) begin
        p_state[p] <= P_IDLE;
        p_rob[p]   <= '0;
        p_addr[p]  <= '0;
        p_key[p]   <= '0;
      end
      for (int c = 0; c < COLBUF_N; c++) fill[c] <= '0;
    end else begin
      // front end: hash, allocate ROB entry, dispatch to a free probe unit
      if (fe_go) begin
        rob[rob_tail].busy        <= 1'b1;
        rob[rob_tail].ready       <= 1'b0;
        rob[rob_tail].hit         <= 1'b0;
        rob[rob_tail].entry       <= in_entry;
        rob[rob_tail].bucket_addr <= fe_bucket;
        rob[rob_tail].target      <= '0;
        rob_tail                  <= (rob_tail == RW'(ROB_DEPTH-1)) ? '0 : rob_tail + 1'b1;
        p_state[free_probe]       <= P_REQ;
        p_rob[free_probe]         <= rob_tail;
        p_addr[free_probe]        <= fe_bucket;
        p_key[free_probe]         <= entry_key(in_entry);
      end

      // probe units
      if (rd_fire) p_state[rd_probe] <= P_WAIT;
      for (int p = 0; p < NUM_PROBES; p++) begin
        if (p_state[p] == P_WAIT && rsp_valid && rsp.id == ID_W'(p)) begin
          hash_node_t node;
          node = hash_node_t'(rsp.data[$bits(hash_node_t)-1:0]);
          if (node.valid && {node.col, node.row} == p_key[p]) begin
            rob[p_rob[p]].ready  <= 1'b1;
            rob[p_rob[p]].hit    <= 1'b1;
            rob[p_rob[p]].target <= node.target;
            p_state[p]           <= P_IDLE;
          end else if (node.next != '0) begin
            p_addr[p]  <= node.next;
            p_state[p] <= P_REQ;
          end else begin
            rob[p_rob[p]].ready <= 1'b1;
            rob[p_rob[p]].hit   <= 1'b0;
            p_state[p]          <= P_IDLE;
          end
        end
      end

      // in-order retirement
      if (wr_fire || retire_miss) begin
        rob[rob_head].busy <= 1'b0;
        rob_head <= (rob_head == RW'(ROB_DEPTH-1)) ? '0 : rob_head + 1'b1;
        if (wr_fire) begin
          fill[head_cb] <= fill[head_cb] + 1'b1;
          shipped_count <= shipped_count + 1'b1;
        end else begin
          miss_count <= miss_count + 1'b1;
        end
      end
      rob_cnt <= rob_cnt + (fe_go ? 1'b1 : 1'b0) - ((wr_fire || retire_miss) ? 1'b1 : 1'b0);

      if (colbuf_clear)
        for (int c = 0; c < COLBUF_N; c++) fill[c] <= '0;
    end
  end

  // Lookups must retire in the order they were allocated.
  a_rob_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rob_cnt <= (RW+1)'(ROB_DEPTH));

endmodule
