// update_shipping_unit: update gathering and shipping unit of one vault.
//
// Gathers the updates of all transactional threads and pushes each one into the column
// buffer of the column it belongs to, ready for update application. Stage 1 is the
// merge_unit (per-thread logs merged by commit ID into the final log). Stages 2 and 3
// are the hash_lookup_unit (find the column buffer of each update through the
// (column,row) hash index, write the update there in commit order). All memory traffic
// of stages 2 and 3 goes through the copy unit, which sits outside this module because
// the vault shares it with the consistency mechanism.
//
// Batching: the final log fills while the unit is idle. A batch is triggered when the
// final log holds FINAL_DEPTH (1024) pending updates, or, to flush the end of a round,
// when every thread log is finished and drained into a non-empty final log. The batch
// size is latched at the trigger; exactly that many entries are handed to the hash
// lookup unit while merging continues behind them. The batch ends when they have all
// retired; 'batch_done' pulses.
//
// From the paper: the three stages, the composition of merge unit, hash lookup unit and
// copy unit, and the trigger at a full final log of 1024 entries. This design's own
// choice: the end-of-round flush trigger.
module update_shipping_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_LOGS    = 8,
  parameter int unsigned IN_DEPTH    = 128,
  parameter int unsigned FINAL_DEPTH = 1024,
  parameter int unsigned NUM_PROBES  = 4,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024,
  parameter int unsigned COLBUF_N    = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   hash_base,
  input  logic                colbuf_clear,
  input  logic [NUM_LOGS-1:0] log_valid,
  output logic [NUM_LOGS-1:0] log_ready,
  input  log_entry_t          log_entry [NUM_LOGS],
  input  logic [NUM_LOGS-1:0] log_done,
  output logic                cmd_valid,
  input  logic                cmd_ready,
  output copy_cmd_t           cmd,
  input  logic                rsp_valid,
  input  copy_rsp_t           rsp,
  output logic                ship_valid,
  output logic [COLID_W-1:0]  ship_col,
  output logic [ADDR_W-1:0]   ship_addr,
  output logic                shipping,
  output logic                batch_done,
  output logic [31:0]         full_triggers,
  output logic [31:0]         flush_triggers,
  output logic [31:0]         shipped_count,
  output logic [31:0]         miss_count
);
  localparam int unsigned FCW = $clog2(FINAL_DEPTH+1);

  logic              f_valid, f_ready, all_drained, h_in_ready, h_busy;
  log_entry_t        f_entry;
  logic [FCW-1:0]    f_count, batch_left;

  merge_unit #(.NUM_LOGS(NUM_LOGS), .IN_DEPTH(IN_DEPTH), .FINAL_DEPTH(FINAL_DEPTH)) u_merge (
    .clk, .rst_n,
    .in_valid(log_valid), .in_ready(log_ready), .in_entry(log_entry), .log_done,
    .out_valid(f_valid), .out_ready(f_ready), .out_entry(f_entry),
    .final_count(f_count), .all_drained
  );

  assign f_ready = shipping && (batch_left != '0) && h_in_ready;

  hash_lookup_unit #(.NUM_PROBES(NUM_PROBES), .ROB_DEPTH(ROB_DEPTH),
                     .NUM_BUCKETS(NUM_BUCKETS), .COLBUF_N(COLBUF_N)) u_hash (
    .clk, .rst_n, .hash_base, .colbuf_clear,
    .in_valid(f_valid && shipping && (batch_left != '0)), .in_ready(h_in_ready),
    .in_entry(f_entry),
    .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp,
    .ship_valid, .ship_col, .ship_addr, .shipped_count, .miss_count, .busy(h_busy)
  );

  logic trig_full, trig_flush;
  assign trig_full  = !shipping && (f_count == FCW'(FINAL_DEPTH));
  assign trig_flush = !shipping && !trig_full && all_drained && (f_count != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shipping       <= 1'b0;
      batch_left     <= '0;
      batch_done     <= 1'b0;
      full_triggers  <= '0;
      flush_triggers <= '0;
    end else begin
      batch_done <= 1'b0;
      if (trig_full || trig_flush) begin
        shipping   <= 1'b1;
        batch_left <= f_count;
        if (trig_full) full_triggers  <= full_triggers + 1'b1;
        else           flush_triggers <= flush_triggers + 1'b1;
      end else if (shipping) begin
        if (f_valid && f_ready) batch_left <= batch_left - 1'b1;
        if (batch_left == '0 && !h_busy) begin
          shipping   <= 1'b0;
          batch_done <= 1'b1;
        end
      end
    end
  end

endmodule
