// polynesia_vault: analytical-island logic in the logic layer of one memory vault.
//
// The HTAP system keeps two replicas of the data: a row-store replica used by the
// transactional engine on the host CPUs, and a column-store, dictionary-encoded replica
// used by analytical queries running on PIM cores inside the 3D-stacked memory. This
// module is the fixed-function hardware that the memory's logic layer adds to every
// vault to keep the analytical replica fresh and consistent:
//   - update_shipping_unit: merges the transactional threads' update logs by commit ID
//     and writes each update into the column buffer of its column (hash lookups and
//     writes through the copy unit);
//   - update_application_unit: applies the updates of one column to the encoded column
//     (sort, dictionary merge, 4-lane re-encode, patches);
//   - snapshot_manager: lazy, shared, column-granularity snapshots for analytical
//     queries, taken by the copy unit; the commit (phase 2) of an update application
//     switches the column's main pointer and marks the column dirty;
//   - copy_unit: the vault's memory engine, shared by the two clients above.
// The copy unit talks to the vault memory controller through one read-request, one
// read-return and one write-request port, brought out as top-level ports. The streams of
// the update application unit (old dictionary, updates, column in/out, patches) and the
// query begin/end strobes connect to the PIM cores and memory controller and are also
// ports. The cube holds 16 such vaults; the PIM cores, the vault-to-vault network and
// the memory itself are outside this module.
//
// Copy-unit arbitration between the two clients is this design's choice: the snapshot
// manager, which sends one command per snapshot, has priority; responses are broadcast
// and each client takes those with its own ID (probe units 0..3, snapshots 8).
// On update completion the committed column length in words is
// ceil(rows * code_bits / 128), the size of the bit-packed new column.
module polynesia_vault
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_LOGS    = 8,
  parameter int unsigned IN_DEPTH    = 128,
  parameter int unsigned FINAL_DEPTH = 1024,
  parameter int unsigned NUM_PROBES  = 4,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024,
  parameter int unsigned COLBUF_N    = 64,
  parameter int unsigned NUM_FETCH   = 4,
  parameter int unsigned NUM_WB      = 4,
  parameter int unsigned TRACK_DEPTH = 16,
  parameter int unsigned MAX_UPD     = 1024,
  parameter int unsigned DICT_MAX    = 2048,
  parameter int unsigned LANES       = 4,
  parameter int unsigned NUM_COLS    = 16,
  parameter int unsigned NUM_SLOTS   = 16,
  parameter int unsigned SLOT_WORDS  = 65536
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // configuration
  input  logic [ADDR_W-1:0]                   hash_base,
  input  logic [ADDR_W-1:0]                   snap_base,
  input  logic                                colbuf_clear,
  // per-thread update logs streamed from memory
  input  logic [NUM_LOGS-1:0]                 log_valid,
  output logic [NUM_LOGS-1:0]                 log_ready,
  input  log_entry_t                          log_entry [NUM_LOGS],
  input  logic [NUM_LOGS-1:0]                 log_done,
  // vault memory controller
  output logic                                mem_rd_valid,
  input  logic                                mem_rd_ready,
  output logic [ADDR_W-1:0]                   mem_rd_addr,
  input  logic                                mem_rsp_valid,
  input  logic [ADDR_W-1:0]                   mem_rsp_addr,
  input  logic [DATA_W-1:0]                   mem_rsp_data,
  output logic                                mem_wr_valid,
  input  logic                                mem_wr_ready,
  output logic [ADDR_W-1:0]                   mem_wr_addr,
  output logic [DATA_W-1:0]                   mem_wr_data,
  // update application
  input  logic                                ua_start,
  input  logic [$clog2(NUM_COLS)-1:0]         ua_col,
  input  logic [ADDR_W-1:0]                   ua_new_addr,
  input  logic [$clog2(DICT_MAX+1)-1:0]       ua_old_len,
  input  logic [$clog2(MAX_UPD+1)-1:0]        ua_upd_len,
  output logic                                ua_busy,
  input  logic                                dict_in_valid,
  output logic                                dict_in_ready,
  input  logic [VAL_W-1:0]                    dict_in_value,
  input  logic                                upd_in_valid,
  output logic                                upd_in_ready,
  input  logic [ROW_W-1:0]                    upd_in_row,
  input  logic [VAL_W-1:0]                    upd_in_value,
  output logic                                dict_out_valid,
  input  logic                                dict_out_ready,
  output logic [VAL_W-1:0]                    dict_out_value,
  output logic                                dict_out_last,
  input  logic                                col_in_valid,
  output logic                                col_in_ready,
  input  logic [LANES-1:0][$clog2(DICT_MAX)-1:0] col_in_code,
  input  logic [LANES-1:0]                    col_in_keep,
  input  logic                                col_in_last,
  output logic                                col_out_valid,
  input  logic                                col_out_ready,
  output logic [LANES-1:0][$clog2(DICT_MAX)-1:0] col_out_code,
  output logic [LANES-1:0]                    col_out_keep,
  output logic                                col_out_last,
  output logic                                patch_out_valid,
  input  logic                                patch_out_ready,
  output logic [ROW_W-1:0]                    patch_out_row,
  output logic [$clog2(DICT_MAX)-1:0]         patch_out_code,
  output logic                                patch_out_last,
  output logic                                ua_done,
  output logic [$clog2(DICT_MAX+1)-1:0]       ua_new_len,
  output logic [$clog2(DICT_MAX+1)-1:0]       ua_new_bits,
  // analytical queries
  input  logic                                qbegin_valid,
  input  logic [$clog2(NUM_COLS)-1:0]         qbegin_col,
  output logic                                qbegin_ack,
  output logic [$clog2(NUM_SLOTS)-1:0]        qbegin_slot,
  output logic [ADDR_W-1:0]                   qbegin_addr,
  output logic                                qbegin_new,
  input  logic                                qend_valid,
  input  logic [$clog2(NUM_SLOTS)-1:0]        qend_slot,
  // status
  output logic                                ship_valid,
  output logic [COLID_W-1:0]                  ship_col,
  output logic [ADDR_W-1:0]                   ship_addr,
  output logic                                shipping,
  output logic                                batch_done,
  output logic [31:0]                         full_triggers,
  output logic [31:0]                         flush_triggers,
  output logic [31:0]                         shipped_count,
  output logic [31:0]                         miss_count,
  output logic [NUM_COLS-1:0]                 col_dirty,
  output logic [NUM_SLOTS-1:0]                slot_used,
  output logic [31:0]                         gc_count,
  output logic                                copy_busy
);
  localparam int unsigned SNAP_ID = 8;

  // ---------------- update gathering and shipping ----------------
  logic      us_cmd_valid, us_cmd_ready, cu_rsp_valid;
  copy_cmd_t us_cmd;
  copy_rsp_t cu_rsp;

  update_shipping_unit #(
    .NUM_LOGS(NUM_LOGS), .IN_DEPTH(IN_DEPTH), .FINAL_DEPTH(FINAL_DEPTH),
    .NUM_PROBES(NUM_PROBES), .ROB_DEPTH(ROB_DEPTH), .NUM_BUCKETS(NUM_BUCKETS),
    .COLBUF_N(COLBUF_N)
  ) u_ship (
    .clk, .rst_n, .hash_base, .colbuf_clear,
    .log_valid, .log_ready, .log_entry, .log_done,
    .cmd_valid(us_cmd_valid), .cmd_ready(us_cmd_ready), .cmd(us_cmd),
    .rsp_valid(cu_rsp_valid), .rsp(cu_rsp),
    .ship_valid, .ship_col, .ship_addr, .shipping, .batch_done,
    .full_triggers, .flush_triggers, .shipped_count, .miss_count
  );

  // ---------------- update application ----------------
  logic [ROW_W-1:0]            ua_col_len;
  logic                        ua_ovf;
  logic [$clog2(NUM_COLS)-1:0] ua_col_q;
  logic [ADDR_W-1:0]           ua_addr_q;

  update_application_unit #(
    .MAX_UPD(MAX_UPD), .DICT_MAX(DICT_MAX), .LANES(LANES), .VAL_W(VAL_W), .ROW_W(ROW_W)
  ) u_apply (
    .clk, .rst_n, .start(ua_start), .old_len(ua_old_len), .upd_len(ua_upd_len),
    .busy(ua_busy),
    .dict_in_valid, .dict_in_ready, .dict_in_value,
    .upd_in_valid, .upd_in_ready, .upd_in_row, .upd_in_value,
    .dict_out_valid, .dict_out_ready, .dict_out_value, .dict_out_last,
    .col_in_valid, .col_in_ready, .col_in_code, .col_in_keep, .col_in_last,
    .col_out_valid, .col_out_ready, .col_out_code, .col_out_keep, .col_out_last,
    .patch_out_valid, .patch_out_ready, .patch_out_row, .patch_out_code, .patch_out_last,
    .done(ua_done), .new_len(ua_new_len), .new_bits(ua_new_bits), .col_len(ua_col_len),
    .dict_overflow(ua_ovf)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ua_col_q  <= '0;
      ua_addr_q <= '0;
    end else if (ua_start && !ua_busy) begin
      ua_col_q  <= ua_col;
      ua_addr_q <= ua_new_addr;
    end
  end

  logic [ADDR_W+15:0] col_bits;
  logic [ADDR_W-1:0]  col_words;
  assign col_bits  = (ADDR_W+16)'(ua_col_len) * (ADDR_W+16)'(ua_new_bits);
  assign col_words = ADDR_W'((col_bits + (ADDR_W+16)'(DATA_W-1)) / (ADDR_W+16)'(DATA_W));

  // ---------------- consistency ----------------
  logic      sm_cmd_valid, sm_cmd_ready;
  copy_cmd_t sm_cmd;

  snapshot_manager #(
    .NUM_COLS(NUM_COLS), .NUM_SLOTS(NUM_SLOTS), .SLOT_WORDS(SLOT_WORDS), .COPY_ID(SNAP_ID)
  ) u_snap (
    .clk, .rst_n, .snap_base,
    .qbegin_valid, .qbegin_col, .qbegin_ack, .qbegin_slot, .qbegin_addr, .qbegin_new,
    .qend_valid, .qend_slot,
    .commit_valid(ua_done && !ua_ovf), .commit_col(ua_col_q), .commit_addr(ua_addr_q),
    .commit_len(col_words),
    .cmd_valid(sm_cmd_valid), .cmd_ready(sm_cmd_ready), .cmd(sm_cmd),
    .rsp_valid(cu_rsp_valid), .rsp(cu_rsp),
    .dirty(col_dirty), .slot_used, .gc_count
  );

  // ---------------- copy unit and its arbitration ----------------
  logic      cu_cmd_valid, cu_cmd_ready;
  copy_cmd_t cu_cmd;

  always_comb begin
    if (sm_cmd_valid) begin
      cu_cmd_valid = 1'b1;
      cu_cmd       = sm_cmd;
    end else begin
      cu_cmd_valid = us_cmd_valid;
      cu_cmd       = us_cmd;
    end
  end
  assign sm_cmd_ready = cu_cmd_ready && sm_cmd_valid;
  assign us_cmd_ready = cu_cmd_ready && !sm_cmd_valid;

  copy_unit #(.NUM_FETCH(NUM_FETCH), .NUM_WB(NUM_WB), .TRACK_DEPTH(TRACK_DEPTH)) u_copy (
    .clk, .rst_n,
    .cmd_valid(cu_cmd_valid), .cmd_ready(cu_cmd_ready), .cmd(cu_cmd),
    .rsp_valid(cu_rsp_valid), .rsp(cu_rsp),
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr,
    .mem_rsp_valid, .mem_rsp_addr, .mem_rsp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .busy(copy_busy)
  );

endmodule
