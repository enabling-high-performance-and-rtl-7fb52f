// tb_dict_merge_unit: self-checking testbench of the dictionary scan/merge unit.
//
// The testbench holds the old dictionary and the sorted update values in arrays that
// answer the unit's read ports, and records what it writes. Cases: disjoint and
// overlapping value sets, duplicate update values, an empty old dictionary, an empty
// update list. Expected results are the set union computed by the testbench; every
// old code must map to the position of the same value in the new dictionary; the code
// width must be ceil(log2(size)) (at least 1); the merge must take old+updates+1 cycles.
module tb_dict_merge_unit;
  localparam int DICT_MAX = 2048;
  localparam int MAX_UPD  = 1024;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic        start, new_wr_en, map_wr_en, busy, done, overflow;
  logic [11:0] old_len, new_len, new_bits;
  logic [10:0] upd_len;
  logic [10:0] old_rd_idx, new_wr_idx, map_old_code, map_new_code;
  logic [9:0]  upd_rd_idx;
  logic [31:0] old_rd_data, upd_rd_data, new_wr_data;

  logic [31:0] old_d [DICT_MAX];
  logic [31:0] upd_d [MAX_UPD];
  logic [31:0] new_d [DICT_MAX];
  logic [10:0] remap [DICT_MAX];

  assign old_rd_data = old_d[old_rd_idx];
  assign upd_rd_data = upd_d[upd_rd_idx];
  always @(posedge clk) begin
    if (new_wr_en) new_d[new_wr_idx] = new_wr_data;
    if (map_wr_en) remap[map_old_code] = map_new_code;
  end

  int checks = 0, failures = 0;

  dict_merge_unit #(.DICT_MAX(DICT_MAX), .MAX_UPD(MAX_UPD), .VAL_W(32)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int no [5] = '{20, 32, 0, 40, 700};
    int nu [5] = '{10, 50, 30, 0, 1000};
    start = 0; old_len = 0; upd_len = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 5; t++) begin
      int unsigned oq [$], uq [$], un [$];
      int cycles, expbits;
      bit seen [int unsigned];
      oq.delete(); uq.delete(); un.delete(); seen.delete();
      // old dictionary: distinct sorted values
      while (oq.size() < no[t]) begin
        int unsigned v;
        v = (t == 4) ? $urandom_range(5000) : $urandom_range(200) * 3;
        if (!seen.exists(v)) begin seen[v] = 1; oq.push_back(v); end
      end
      oq.sort();
      for (int i = 0; i < nu[t]; i++) uq.push_back((t == 4) ? $urandom_range(5000) : $urandom_range(300));
      uq.sort();
      foreach (oq[i]) old_d[i] = oq[i];
      foreach (uq[i]) upd_d[i] = uq[i];
      // expected union
      un = oq;
      foreach (uq[i]) if (!seen.exists(uq[i])) begin seen[uq[i]] = 1; un.push_back(uq[i]); end
      un.sort();
      old_len = 12'(no[t]); upd_len = 11'(nu[t]);
      start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done && cycles < 5000) begin @(negedge clk); cycles++; end
      check(cycles == no[t] + nu[t] + 2, $sformatf("case %0d took %0d cycles", t, cycles));
      check(new_len == 12'(un.size()), $sformatf("case %0d size %0d vs %0d", t, new_len, un.size()));
      check(!overflow, "no overflow");
      expbits = 1;
      while ((1 << expbits) < un.size()) expbits++;
      check(new_bits == 12'(expbits), $sformatf("case %0d bits %0d vs %0d", t, new_bits, expbits));
      foreach (un[i]) check(new_d[i] == un[i], $sformatf("case %0d new[%0d]", t, i));
      foreach (oq[i]) check(new_d[remap[i]] == oq[i], $sformatf("case %0d remap[%0d]", t, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
