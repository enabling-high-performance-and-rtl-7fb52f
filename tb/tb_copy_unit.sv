// tb_copy_unit: self-checking testbench of the copy unit.
//
// Runs region copies of several lengths (including 0 and lengths not a multiple of the
// fetch-unit count) against a memory model that returns reads out of order, with
// single reads and writes issued while a copy runs. Checks every destination word,
// the data of every single read, that words outside the destination are untouched, that
// each copy answers once with its ID, and that reads really did return out of order.
module tb_copy_unit;
  import polynesia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cmd_valid, cmd_ready, rsp_valid, busy;
  copy_cmd_t         cmd;
  copy_rsp_t         rsp;
  logic              mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [ADDR_W-1:0] mem_rd_addr, mem_rsp_addr, mem_wr_addr;
  logic [DATA_W-1:0] mem_rsp_data, mem_wr_data;

  int checks = 0, failures = 0;

  copy_unit dut (.*);
  vault_mem_model u_mem (.*);

  function automatic logic [127:0] pattern(logic [31:0] a);
    return {a ^ 32'h5a5a_0000, ~a, a * 32'd7, a + 32'd3};
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // single-read responses collected here
  logic [127:0] rd_data [int];
  int           done_seen [int];
  always @(posedge clk) if (rsp_valid) begin
    if (rsp.id >= 8) done_seen[int'(rsp.id)] = done_seen.exists(int'(rsp.id)) ? done_seen[int'(rsp.id)] + 1 : 1;
    else rd_data[int'(rsp.id)] = rsp.data;
  end

  // Drive at the falling edge, sample 'ready' there, complete at the rising edge.
  task automatic send(copy_cmd_t c);
    bit ok;
    @(negedge clk);
    cmd       = c;
    cmd_valid = 1'b1;
    forever begin
      #1; ok = cmd_ready;
      @(posedge clk);
      if (ok) break;
      @(negedge clk);
    end
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  initial begin
    int lens [5] = '{37, 1, 0, 64, 203};
    cmd_valid = 1'b0;
    cmd       = '0;
    for (int a = 0; a < 4096; a++) u_mem.poke(32'h1000 + a, pattern(32'h1000 + a));
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    for (int t = 0; t < 5; t++) begin
      copy_cmd_t c;
      logic [31:0] src, dst;
      int wait_cycles;
      src = 32'h1000 + 32'(t * 211);
      dst = 32'h8000 + 32'(t * 1024);
      c = '0;
      c.op = CP_COPY; c.id = ID_W'(8 + t); c.src = src; c.dst = dst; c.len = 32'(lens[t]);
      send(c);
      // single read and write while the copy runs
      c = '0;
      c.op = CP_READ; c.id = ID_W'(t); c.src = 32'h1f00 + 32'(t);
      send(c);
      c = '0;
      c.op = CP_WRITE; c.id = 4'd0; c.dst = 32'h4000 + 32'(t); c.wdata = pattern(32'hdead + 32'(t));
      send(c);
      wait_cycles = 0;
      while (!(done_seen.exists(8 + t)) && wait_cycles < 20000) begin
        @(posedge clk);
        wait_cycles++;
      end
      repeat (20) @(posedge clk);
      check(done_seen.exists(8 + t) && done_seen[8 + t] == 1, $sformatf("copy %0d completed once", t));
      for (int w = 0; w < lens[t]; w++)
        check(u_mem.peek(dst + 32'(w)) == pattern(src + 32'(w)), $sformatf("copy %0d word %0d", t, w));
      check(u_mem.peek(dst + 32'(lens[t])) == '0, $sformatf("copy %0d stops at its length", t));
      check(rd_data.exists(t) && rd_data[t] == pattern(32'h1f00 + 32'(t)), $sformatf("single read %0d", t));
      check(u_mem.peek(32'h4000 + 32'(t)) == pattern(32'hdead + 32'(t)), $sformatf("single write %0d", t));
    end
    check(u_mem.ooo > 0, "reads returned out of order");
    check(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
