// tb_bitonic_sorter: self-checking testbench of the 1024-value bitonic sort unit.
//
// Three rounds: a full random load, a partial load (the remaining entries keep the
// all-ones padding from 'clr') and a load with many duplicates. The result is compared
// with the testbench's own sort of the same values, and the sort time is checked to be
// log2(N)*(log2(N)+1)/2 = 55 cycles for N = 1024.
module tb_bitonic_sorter;
  localparam int N = 1024;
  localparam int W = 33;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  initial #2 rst_n = 1'b0;

  logic         clr, ld_en, start, busy, done;
  logic [9:0]   ld_idx, rd_idx;
  logic [W-1:0] ld_data, rd_data;

  int checks = 0, failures = 0;

  bitonic_sorter #(.N(N), .W(W)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int cnt [3] = '{1024, 300, 1024};
    clr = 0; ld_en = 0; start = 0; ld_idx = 0; ld_data = 0; rd_idx = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < 3; r++) begin
      logic [W-1:0] ref_q [$];
      int cycles;
      ref_q.delete();
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int i = 0; i < cnt[r]; i++) begin
        logic [W-1:0] v;
        v = (r == 2) ? W'($urandom_range(15)) : {1'b0, 32'($urandom)};
        ref_q.push_back(v);
        ld_en = 1; ld_idx = 10'(i); ld_data = v;
        @(negedge clk);
      end
      ld_en = 0;
      for (int i = cnt[r]; i < N; i++) ref_q.push_back('1);
      ref_q.sort();
      start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done && cycles < 1000) begin
        @(negedge clk);
        cycles++;
      end
      check(cycles == 56, $sformatf("round %0d sort took %0d cycles (55 stages + done)", r, cycles));
      for (int i = 0; i < N; i++) begin
        rd_idx = 10'(i);
        #1;
        check(rd_data == ref_q[i], $sformatf("round %0d position %0d: %h vs %h", r, i, rd_data, ref_q[i]));
      end
    end
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
