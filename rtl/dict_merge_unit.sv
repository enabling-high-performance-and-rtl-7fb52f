// dict_merge_unit: scan/merge unit of the update application unit.
//
// Dictionary encoding stores a column as fixed-width integer codes; the dictionary is
// the sorted list of distinct values and a value's code is its position in that list.
// After the updates of a column have been sorted into an update dictionary, this unit
// merges the old dictionary and the sorted update values with one linear scan
// (O(n+m)) into the new dictionary, dropping duplicates, and at the same time writes
// the index that maps every old code to its new code. It finally reports the size of
// the new dictionary and the number of bits a code now needs (ceil(log2(size)), at
// least 1).
//
// Each cycle it looks at the heads of both lists (combinational read ports old_rd_* and
// upd_rd_*), takes the smaller one (the old entry on a tie) and either appends it to the
// new dictionary or, if equal to the last appended value, skips it. Taking an old entry
// always writes its remap entry. Run time is old_len + upd_len cycles plus one.
//
// From the paper: merging the two sorted dictionaries by linear scan, the old-to-new
// code index and computing the code width. This design's own choices: the one-value-per
// -cycle schedule and the port structure.
module dict_merge_unit #(
  parameter int unsigned DICT_MAX = 2048,
  parameter int unsigned MAX_UPD  = 1024,
  parameter int unsigned VAL_W    = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(DICT_MAX+1)-1:0] old_len,
  input  logic [$clog2(MAX_UPD+1)-1:0]  upd_len,
  output logic [$clog2(DICT_MAX)-1:0]   old_rd_idx,
  input  logic [VAL_W-1:0]              old_rd_data,
  output logic [$clog2(MAX_UPD)-1:0]    upd_rd_idx,
  input  logic [VAL_W-1:0]              upd_rd_data,
  output logic                          new_wr_en,
  output logic [$clog2(DICT_MAX)-1:0]   new_wr_idx,
  output logic [VAL_W-1:0]              new_wr_data,
  output logic                          map_wr_en,
  output logic [$clog2(DICT_MAX)-1:0]   map_old_code,
  output logic [$clog2(DICT_MAX)-1:0]   map_new_code,
  output logic                          busy,
  output logic                          done,
  output logic                          overflow,
  output logic [$clog2(DICT_MAX+1)-1:0] new_len,
  output logic [$clog2(DICT_MAX+1)-1:0] new_bits
);
  localparam int unsigned CW = $clog2(DICT_MAX);
  localparam int unsigned LW = $clog2(DICT_MAX+1);
  localparam int unsigned UW = $clog2(MAX_UPD+1);

  logic [LW-1:0]    i;      // old dictionary position
  logic [UW-1:0]    j;      // update position
  logic [LW-1:0]    n;      // new dictionary size so far
  logic [VAL_W-1:0] last;
  logic             have_last;

  logic old_left, upd_left, take_old, dup;
  logic [VAL_W-1:0] cand;

  assign old_left   = (i < old_len);
  assign upd_left   = (j < upd_len);
  assign old_rd_idx = CW'(i);
  assign upd_rd_idx = ($clog2(MAX_UPD))'(j);
  assign take_old   = old_left && (!upd_left || old_rd_data <= upd_rd_data);
  assign cand       = take_old ? old_rd_data : upd_rd_data;
  assign dup        = have_last && (cand == last);

  assign new_wr_en    = busy && (old_left || upd_left) && !dup && (n < LW'(DICT_MAX));
  assign new_wr_idx   = CW'(n);
  assign new_wr_data  = cand;
  assign map_wr_en    = busy && take_old;
  assign map_old_code = CW'(i);
  assign map_new_code = dup ? CW'(n - 1'b1) : CW'(n);

  function automatic logic [LW-1:0] bits_for(logic [LW-1:0] size);
    logic [LW-1:0] b;
    b = LW'(1);
    for (int k = 1; k <= LW; k++)
      if (size > (LW+1)'(1 << k)) b = LW'(k + 1);
    return b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i         <= '0;
      j         <= '0;
      n         <= '0;
      last      <= '0;
      have_last <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      overflow  <= 1'b0;
      new_len   <= '0;
      new_bits  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        i         <= '0;
        j         <= '0;
        n         <= '0;
        have_last <= 1'b0;
        overflow  <= 1'b0;
        busy      <= 1'b1;
      end else if (busy) begin
        if (old_left || upd_left) begin
          if (take_old) i <= i + 1'b1;
          else          j <= j + 1'b1;
          if (!dup) begin
            if (n < LW'(DICT_MAX)) n <= n + 1'b1;
            else                   overflow <= 1'b1;
            last      <= cand;
            have_last <= 1'b1;
          end
        end else begin
          busy     <= 1'b0;
          done     <= 1'b1;
          new_len  <= n;
          new_bits <= bits_for(n);
        end
      end
    end
  end

endmodule
