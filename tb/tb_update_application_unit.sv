// tb_update_application_unit: self-checking testbench of the update application unit.
//
// For each case the testbench makes an old dictionary (sorted distinct values), a
// column of codes into it and a list of updates (row, value) in commit order, some
// rows updated twice and some values already in the dictionary. It computes the
// expected new dictionary (sorted union), the re-encoded column (every old code
// replaced by the position of its value in the new dictionary), the patches (code of
// each update's value) and the code width, all independently of the unit, and checks
// the unit's streams against them. Applying the patches in order to the re-encoded
// column must give a column whose decoded values equal the old column with the updates
// applied. Cases include the full 1024 updates, an empty update list and a partial last
// beat. Output streams are back-pressured at random.
module tb_update_application_unit;
  localparam int LANES = 4;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic        start, busy, done, dict_overflow;
  logic [11:0] old_len, new_len, new_bits;
  logic [10:0] upd_len;
  logic        dict_in_valid, dict_in_ready, upd_in_valid, upd_in_ready;
  logic [31:0] dict_in_value, upd_in_row, upd_in_value;
  logic        dict_out_valid, dict_out_ready, dict_out_last;
  logic [31:0] dict_out_value;
  logic        col_in_valid, col_in_ready, col_in_last, col_out_valid, col_out_ready, col_out_last;
  logic [LANES-1:0][10:0] col_in_code, col_out_code;
  logic [LANES-1:0] col_in_keep, col_out_keep;
  logic        patch_out_valid, patch_out_ready, patch_out_last;
  logic [31:0] patch_out_row, col_len;
  logic [10:0] patch_out_code;

  int checks = 0, failures = 0;

  update_application_unit dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Output back-pressure changes just after the rising edge, so that it is stable when
  // the input drivers sample the handshakes at the falling edge.
  always @(posedge clk) begin
    #1;
    dict_out_ready  = ($urandom_range(3) != 0);
    col_out_ready   = ($urandom_range(3) != 0);
    patch_out_ready = ($urandom_range(3) != 0);
  end

  initial begin
    int n_old [4] = '{30, 5, 200, 1};
    int n_col [4] = '{101, 64, 2000, 3};
    int n_upd [4] = '{40, 0, 1024, 7};
    start = 0; old_len = 0; upd_len = 0;
    dict_in_valid = 0; upd_in_valid = 0; col_in_valid = 0; col_in_last = 0;
    dict_in_value = 0; upd_in_row = 0; upd_in_value = 0; col_in_code = '0; col_in_keep = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int t = 0; t < 4; t++) begin
      int unsigned od [$], nd [$], col [$], urow [$], uval [$];
      int unsigned got_dict [$], got_col [$], got_prow [$], got_pcode [$];
      bit seen [int unsigned];
      int pos [int unsigned];
      int expbits, cycles, beat;
      od.delete(); nd.delete(); col.delete(); urow.delete(); uval.delete(); seen.delete(); pos.delete();
      got_dict.delete(); got_col.delete(); got_prow.delete(); got_pcode.delete();
      while (od.size() < n_old[t]) begin
        int unsigned v;
        v = $urandom_range(100000);
        if (!seen.exists(v)) begin seen[v] = 1; od.push_back(v); end
      end
      od.sort();
      for (int i = 0; i < n_col[t]; i++) col.push_back($urandom_range(n_old[t]-1));
      for (int i = 0; i < n_upd[t]; i++) begin
        urow.push_back((i % 5 == 4) ? urow[i-1] : $urandom_range(n_col[t]-1));
        uval.push_back((i % 3 == 0) ? od[$urandom_range(n_old[t]-1)] : $urandom_range(100000));
      end
      nd = od;
      foreach (uval[i]) if (!seen.exists(uval[i])) begin seen[uval[i]] = 1; nd.push_back(uval[i]); end
      nd.sort();
      foreach (nd[i]) pos[nd[i]] = i;
      expbits = 1;
      while ((1 << expbits) < nd.size()) expbits++;

      @(negedge clk);
      old_len = 12'(n_old[t]); upd_len = 11'(n_upd[t]); start = 1;
      @(negedge clk) start = 0;
      fork
        begin // old dictionary then updates
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
        begin // column in
          beat = 0;
          while (beat * LANES < n_col[t]) begin
            for (int l = 0; l < LANES; l++) begin
              int r;
              r = beat * LANES + l;
              col_in_keep[l] = (r < n_col[t]);
              col_in_code[l] = (r < n_col[t]) ? 11'(col[r]) : 11'd0;
            end
            col_in_last = ((beat + 1) * LANES >= n_col[t]);
            col_in_valid = 1;
            forever begin bit ok; #1; ok = col_in_ready; @(posedge clk); if (ok) break; @(negedge clk); end
            @(negedge clk);
            beat++;
          end
          col_in_valid = 0;
        end
        begin // collect outputs
          cycles = 0;
          while (!done && cycles < 100000) begin
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
      check(new_len == 12'(nd.size()), $sformatf("case %0d dictionary size %0d vs %0d", t, new_len, nd.size()));
      check(new_bits == 12'(expbits), $sformatf("case %0d code bits", t));
      check(!dict_overflow, "no overflow");
      check(col_len == 32'(n_col[t]), $sformatf("case %0d column length", t));
      check(got_dict.size() == nd.size(), $sformatf("case %0d dictionary stream length", t));
      foreach (nd[i]) check(i < got_dict.size() && got_dict[i] == nd[i], $sformatf("case %0d dict[%0d]", t, i));
      check(got_col.size() == col.size(), $sformatf("case %0d column stream length", t));
      foreach (col[i]) check(i < got_col.size() && got_col[i] == pos[od[col[i]]], $sformatf("case %0d row %0d re-encoded", t, i));
      check(got_prow.size() == urow.size(), $sformatf("case %0d patch count", t));
      foreach (urow[i]) check(i < got_prow.size() && got_prow[i] == urow[i] && got_pcode[i] == pos[uval[i]],
                              $sformatf("case %0d patch %0d", t, i));
      // end-to-end: decoded new column equals old column with updates applied
      begin
        int unsigned newcol [$], want [$];
        want.delete();
        newcol = got_col;
        foreach (got_prow[i]) if (got_prow[i] < newcol.size()) newcol[got_prow[i]] = got_pcode[i];
        foreach (col[i]) want.push_back(od[col[i]]);
        foreach (urow[i]) want[urow[i]] = uval[i];
        foreach (want[i]) check(i < newcol.size() && newcol[i] < nd.size() && nd[newcol[i]] == want[i],
                                $sformatf("case %0d decoded row %0d", t, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
