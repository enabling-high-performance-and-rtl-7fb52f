// update_application_unit: applies a batch of updates to one dictionary-encoded column.
//
// A column is stored as fixed-width codes plus a sorted dictionary of its distinct
// values. Applying updates naively means decoding the whole column, writing the
// updates, sorting the whole column to rebuild the dictionary and re-encoding it. This
// unit instead sorts only the (at most MAX_UPD = 1024) new values, merges them with
// the already sorted old dictionary, and re-encodes the column through an index from
// old code to new code, so the column is never decoded and no column-sized sort is
// needed.
//
// Sequence after 'start' (with old_len and upd_len given):
//   1. load: the old dictionary is streamed in (dict_in_*), then the updates in commit
//      order (upd_in_*: row and new value). Updates are kept in commit order and their
//      values are loaded into the sort unit as key {0,value}; unused sorter entries
//      hold all ones and sort last.
//   2. sort: bitonic_sorter sorts the update values (55 cycles for 1024 values).
//   3. merge: dict_merge_unit scans both sorted lists into the new dictionary and writes
//      the old-to-new code index. The index is kept LANES times, one copy per lookup
//      lane.
//   4. dictionary out: the new dictionary is streamed out (dict_out_*).
//   5. re-encode: the old column streams through (col_in_* -> col_out_*), LANES codes
//      per beat, each lane translating its code through its own index copy in the same
//      cycle; 'col_len' counts the rows.
//   6. patch: for every update, in commit order, the new value's code is found by a
//      binary search of the new dictionary (one probe per cycle) and (row, code) is sent
//      on patch_out_*; later updates of a row therefore overwrite earlier ones.
//   7. 'done' pulses with new_len and new_bits (code width of the new dictionary).
// Writing the new column, dictionary and patches to memory, and then switching the
// column's pointers in one step (phase 2 of the update), is left to the caller.
//
// From the paper: the three-step optimised algorithm (sort the updates, merge old and
// update dictionaries into the new dictionary and the code index, re-encode the column
// through the index and the new dictionary), a 1024-value bitonic sort unit, four
// parallel lookup units with one index structure each and no reorder buffer, and a
// logarithmic search through the sorted dictionary to encode a value. This design's own
// choices: streaming interfaces in place of memory accesses, a direct (code-indexed)
// index, patching updated rows after the bulk re-encode, and treating every update as a
// value write to its row (deletions are not removed from the column).
module update_application_unit #(
  parameter int unsigned MAX_UPD  = 1024,
  parameter int unsigned DICT_MAX = 2048,
  parameter int unsigned LANES    = 4,
  parameter int unsigned VAL_W    = 32,
  parameter int unsigned ROW_W    = 32
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic [$clog2(DICT_MAX+1)-1:0]       old_len,
  input  logic [$clog2(MAX_UPD+1)-1:0]        upd_len,
  output logic                                busy,
  // old dictionary in
  input  logic                                dict_in_valid,
  output logic                                dict_in_ready,
  input  logic [VAL_W-1:0]                    dict_in_value,
  // updates in, commit order
  input  logic                                upd_in_valid,
  output logic                                upd_in_ready,
  input  logic [ROW_W-1:0]                    upd_in_row,
  input  logic [VAL_W-1:0]                    upd_in_value,
  // new dictionary out
  output logic                                dict_out_valid,
  input  logic                                dict_out_ready,
  output logic [VAL_W-1:0]                    dict_out_value,
  output logic                                dict_out_last,
  // column re-encode
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
  // updated rows
  output logic                                patch_out_valid,
  input  logic                                patch_out_ready,
  output logic [ROW_W-1:0]                    patch_out_row,
  output logic [$clog2(DICT_MAX)-1:0]         patch_out_code,
  output logic                                patch_out_last,
  // completion
  output logic                                done,
  output logic [$clog2(DICT_MAX+1)-1:0]       new_len,
  output logic [$clog2(DICT_MAX+1)-1:0]       new_bits,
  output logic [ROW_W-1:0]                    col_len,
  output logic                                dict_overflow
);
  localparam int unsigned CW = $clog2(DICT_MAX);
  localparam int unsigned LW = $clog2(DICT_MAX+1);
  localparam int unsigned UI = $clog2(MAX_UPD);
  localparam int unsigned UW = $clog2(MAX_UPD+1);

  typedef enum logic [3:0] {
    S_IDLE, S_LD_DICT, S_LD_UPD, S_SORT, S_SORT_WAIT, S_MERGE, S_MERGE_WAIT,
    S_DICT_OUT, S_REENC, S_PATCH, S_DONE
  } state_e;

  state_e           state;
  logic [LW-1:0]    old_n;
  logic [UW-1:0]    upd_n;
  logic [LW-1:0]    idx;

  logic [VAL_W-1:0] old_dict [DICT_MAX];
  logic [VAL_W-1:0] new_dict [DICT_MAX];
  logic [ROW_W-1:0] upd_row  [MAX_UPD];
  logic [VAL_W-1:0] upd_val  [MAX_UPD];

  // ---------------- sort unit ----------------
  logic             s_clr, s_ld, s_start, s_busy, s_done;
  logic [UI-1:0]    s_ld_idx, s_rd_idx;
  logic [VAL_W:0]   s_ld_data, s_rd_data;

  assign s_clr     = (state == S_IDLE) && start;
  assign s_ld      = (state == S_LD_UPD) && upd_in_valid;
  assign s_ld_idx  = UI'(idx);
  assign s_ld_data = {1'b0, upd_in_value};
  assign s_start   = (state == S_SORT);

  bitonic_sorter #(.N(MAX_UPD), .W(VAL_W+1)) u_sort (
    .clk, .rst_n, .clr(s_clr), .ld_en(s_ld), .ld_idx(s_ld_idx), .ld_data(s_ld_data),
    .start(s_start), .busy(s_busy), .done(s_done), .rd_idx(s_rd_idx), .rd_data(s_rd_data)
  );

  // ---------------- scan/merge unit ----------------
  logic             m_start, m_busy, m_done, m_new_we, m_map_we, m_ovf;
  logic [CW-1:0]    m_old_idx, m_new_idx, m_map_old, m_map_new;
  logic [VAL_W-1:0] m_new_data;
  logic [LW-1:0]    m_new_len, m_new_bits;

  assign m_start = (state == S_MERGE);

  dict_merge_unit #(.DICT_MAX(DICT_MAX), .MAX_UPD(MAX_UPD), .VAL_W(VAL_W)) u_merge (
    .clk, .rst_n, .start(m_start), .old_len(old_n), .upd_len(upd_n),
    .old_rd_idx(m_old_idx), .old_rd_data(old_dict[m_old_idx]),
    .upd_rd_idx(s_rd_idx), .upd_rd_data(s_rd_data[VAL_W-1:0]),
    .new_wr_en(m_new_we), .new_wr_idx(m_new_idx), .new_wr_data(m_new_data),
    .map_wr_en(m_map_we), .map_old_code(m_map_old), .map_new_code(m_map_new),
    .busy(m_busy), .done(m_done), .overflow(m_ovf), .new_len(m_new_len),
    .new_bits(m_new_bits)
  );

  // ---------------- binary search for the patch step ----------------
  logic [LW:0]      lo, hi;
  logic [LW:0]      mid;
  logic             searching;
  logic             found;
  logic [CW-1:0]    found_code;
  logic [VAL_W-1:0] key;
  logic [VAL_W-1:0] mid_val;

  assign key     = upd_val[UI'(idx)];
  assign mid     = (lo + hi) >> 1;
  assign mid_val = new_dict[CW'(mid)];

  // ---------------- stream handshakes ----------------
  assign busy          = (state != S_IDLE);
  assign dict_in_ready = (state == S_LD_DICT);
  assign upd_in_ready  = (state == S_LD_UPD);

  assign dict_out_valid = (state == S_DICT_OUT);
  assign dict_out_value = new_dict[CW'(idx)];
  assign dict_out_last  = (idx == new_len - 1'b1);

  assign col_in_ready  = (state == S_REENC) && col_out_ready;
  assign col_out_valid = (state == S_REENC) && col_in_valid;
  assign col_out_keep  = col_in_keep;
  assign col_out_last  = col_in_last;
  // one copy of the old-to-new code map per lane, each a memory of its own
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [CW-1:0] remap [DICT_MAX];
    always_ff @(posedge clk) begin
      if (m_map_we) remap[m_map_old] <= m_map_new;
    end
    assign col_out_code[l] = remap[col_in_code[l]];
  end

  assign patch_out_valid = (state == S_PATCH) && found;
  assign patch_out_row   = upd_row[UI'(idx)];
  assign patch_out_code  = found_code;
  assign patch_out_last  = (idx == LW'(upd_n) - 1'b1);

  logic [ROW_W-1:0] beat_rows;
  always_comb begin
    beat_rows = '0;
    for (int l = 0; l < LANES; l++) beat_rows += ROW_W'(col_in_keep[l]);
  end

  // ---------------- memories ----------------
  always_ff @(posedge clk) begin
    if (state == S_LD_DICT && dict_in_valid) old_dict[CW'(idx)] <= dict_in_value;
  end
  always_ff @(posedge clk) begin
    if (state == S_LD_UPD && upd_in_valid) upd_row[UI'(idx)] <= upd_in_row;
  end
  always_ff @(posedge clk) begin
    if (state == S_LD_UPD && upd_in_valid) upd_val[UI'(idx)] <= upd_in_value;
  end
  always_ff @(posedge clk) begin
    if (m_new_we) new_dict[m_new_idx] <= m_new_data;
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      old_n         <= '0;
      upd_n         <= '0;
      idx           <= '0;
      lo            <= '0;
      hi            <= '0;
      searching     <= 1'b0;
      found         <= 1'b0;
      found_code    <= '0;
      done          <= 1'b0;
      new_len       <= '0;
      new_bits      <= '0;
      col_len       <= '0;
      dict_overflow <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          old_n   <= old_len;
          upd_n   <= upd_len;
          idx     <= '0;
          col_len <= '0;
          state   <= (old_len != '0) ? S_LD_DICT : ((upd_len != '0) ? S_LD_UPD : S_SORT);
        end
        S_LD_DICT: if (dict_in_valid) begin
          if (idx == old_n - 1'b1) begin
            idx   <= '0;
            state <= (upd_n != '0) ? S_LD_UPD : S_SORT;
          end else idx <= idx + 1'b1;
        end
        S_LD_UPD: if (upd_in_valid) begin
          if (idx == LW'(upd_n) - 1'b1) begin
            idx   <= '0;
            state <= S_SORT;
          end else idx <= idx + 1'b1;
        end
        S_SORT:      state <= S_SORT_WAIT;
        S_SORT_WAIT: if (s_done) state <= S_MERGE;
        S_MERGE:     state <= S_MERGE_WAIT;
        S_MERGE_WAIT: if (m_done) begin
          new_len       <= m_new_len;
          new_bits      <= m_new_bits;
          dict_overflow <= m_ovf;
          idx           <= '0;
          state         <= (m_new_len != '0) ? S_DICT_OUT : S_REENC;
        end
        S_DICT_OUT: if (dict_out_ready) begin
          if (dict_out_last) begin
            idx   <= '0;
            state <= S_REENC;
          end else idx <= idx + 1'b1;
        end
        S_REENC: if (col_in_valid && col_out_ready) begin
          col_len <= col_len + beat_rows;
          if (col_in_last) begin
            idx       <= '0;
            searching <= (upd_n != '0);
            found     <= 1'b0;
            lo        <= '0;
            hi        <= (LW+1)'(new_len) - 1'b1;
            state     <= (upd_n != '0) ? S_PATCH : S_DONE;
          end
        end
        S_PATCH: begin
          if (searching) begin
            if (mid_val == key || lo >= hi) begin
              searching  <= 1'b0;
              found      <= 1'b1;
              found_code <= CW'(mid);
            end else if (mid_val < key) lo <= mid + 1'b1;
            else                        hi <= (mid == '0) ? '0 : mid - 1'b1;
          end else if (found && patch_out_ready) begin
            found <= 1'b0;
            if (patch_out_last) state <= S_DONE;
            else begin
              idx       <= idx + 1'b1;
              searching <= 1'b1;
              lo        <= '0;
              hi        <= (LW+1)'(new_len) - 1'b1;
            end
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
