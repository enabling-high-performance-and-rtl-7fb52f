// merge_unit: merges the per-thread update logs into one final log ordered by commit ID.
//
// Each transactional thread keeps an update log already sorted by commit ID. The unit
// holds NUM_LOGS input log queues (FIFOs of IN_DEPTH entries, filled by streaming the
// logs from DRAM) and a comparator tree of log2(NUM_LOGS) levels over the queue heads.
// Every cycle the tree finds the oldest head (smallest commit ID); it is popped and
// appended to the tail of the final log, a further FIFO of FINAL_DEPTH entries.
// An entry is only taken when every input queue either holds a head or has been
// declared finished through 'log_done', so a later-arriving older entry can never be
// overtaken: the final log is exactly sorted.
//
// From the paper: 8 input queues of 128 updates, a 3-level comparator tree, the final log
// as a ninth FIFO and the final-log capacity of 1024 entries. This design's own choices:
// the 'log_done' handshake, ties broken towards the lower queue index, one entry merged
// per cycle.
//
// Interface: in_valid/in_ready/in_entry per log (valid-ready), log_done per log (level,
// no more entries in this round), out_* the final-log head (valid-ready, show-ahead),
// final_count its occupancy, all_drained when every log is done and every input queue
// is empty.
module merge_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_LOGS    = 8,
  parameter int unsigned IN_DEPTH    = 128,
  parameter int unsigned FINAL_DEPTH = 1024
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic       [NUM_LOGS-1:0]        in_valid,
  output logic       [NUM_LOGS-1:0]        in_ready,
  input  log_entry_t                       in_entry [NUM_LOGS],
  input  logic       [NUM_LOGS-1:0]        log_done,
  output logic                             out_valid,
  input  logic                             out_ready,
  output log_entry_t                       out_entry,
  output logic [$clog2(FINAL_DEPTH+1)-1:0] final_count,
  output logic                             all_drained
);
  localparam int unsigned LEVELS = $clog2(NUM_LOGS);
  localparam int unsigned LEAVES = 1 << LEVELS;
  localparam int unsigned IDX_W  = (LEVELS > 0) ? LEVELS : 1;
  localparam int unsigned EW     = $bits(log_entry_t);

  typedef struct packed {
    logic                valid;
    logic [COMMIT_W-1:0] commit_id;
    logic [IDX_W-1:0]    idx;
  } cand_t;

  logic       [NUM_LOGS-1:0] q_valid, q_pop;
  log_entry_t                q_head [NUM_LOGS];
  logic [EW-1:0]             q_head_bits [NUM_LOGS];

  for (genvar g = 0; g < NUM_LOGS; g++) begin : g_inq
    logic [$clog2(IN_DEPTH+1)-1:0] unused_cnt;
    sync_fifo #(.WIDTH(EW), .DEPTH(IN_DEPTH)) u_q (
      .clk, .rst_n,
      .wr_valid(in_valid[g]), .wr_ready(in_ready[g]), .wr_data(in_entry[g]),
      .rd_valid(q_valid[g]), .rd_ready(q_pop[g]), .rd_data(q_head_bits[g]),
      .count(unused_cnt)
    );
    assign q_head[g] = log_entry_t'(q_head_bits[g]);
  end

  // Comparator tree: level 0 holds the queue heads, each further level keeps the older
  // of two candidates, the root is the oldest head overall.
  cand_t tree [LEVELS+1][LEAVES];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int n = 0; n < LEAVES; n++) tree[l][n] = '0;
    for (int n = 0; n < NUM_LOGS; n++) begin
      tree[0][n].valid     = q_valid[n];
      tree[0][n].commit_id = q_head[n].commit_id;
      tree[0][n].idx       = IDX_W'(n);
    end
    for (int l = 1; l <= LEVELS; l++) begin
      for (int n = 0; n < (LEAVES >> l); n++) begin
        if (tree[l-1][2*n].valid &&
            (!tree[l-1][2*n+1].valid ||
             tree[l-1][2*n].commit_id <= tree[l-1][2*n+1].commit_id))
          tree[l][n] = tree[l-1][2*n];
        else
          tree[l][n] = tree[l-1][2*n+1];
      end
    end
  end

  cand_t      winner;
  logic       all_ready, f_wr_ready, emit;
  log_entry_t win_entry;

  assign winner    = tree[LEVELS][0];
  assign all_ready = &(q_valid | log_done);
  assign emit      = winner.valid && all_ready && f_wr_ready;
  assign win_entry = q_head[winner.idx];
  assign all_drained = &log_done && (q_valid == '0);

  always_comb begin
    q_pop = '0;
    if (emit) q_pop[winner.idx] = 1'b1;
  end

  logic [EW-1:0] out_bits;

  sync_fifo #(.WIDTH(EW), .DEPTH(FINAL_DEPTH)) u_final (
    .clk, .rst_n,
    .wr_valid(emit), .wr_ready(f_wr_ready), .wr_data(win_entry),
    .rd_valid(out_valid), .rd_ready(out_ready), .rd_data(out_bits),
    .count(final_count)
  );
  assign out_entry = log_entry_t'(out_bits);

endmodule
