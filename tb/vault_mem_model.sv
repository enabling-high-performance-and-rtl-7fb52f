// vault_mem_model: behavioural model of a vault memory controller and its DRAM, for
// simulation only (not synthesizable logic).
//
// Word-addressed sparse memory of 128-bit words; unwritten words read as zero. A read
// request is accepted when mem_rd_ready is high (randomly withheld, about one cycle in
// RD_STALL_PCT percent) and returned between MIN_LAT and MAX_LAT cycles later, with its
// address; when several reads are due the one returned is picked at random, so returns
// come back out of order. Writes are accepted when mem_wr_ready is high (randomly
// withheld) and take effect at once. The testbench can read and write words directly
// through peek/poke.
module vault_mem_model #(
  parameter int unsigned MIN_LAT      = 3,
  parameter int unsigned MAX_LAT      = 12,
  parameter int unsigned RD_STALL_PCT = 20,
  parameter int unsigned WR_STALL_PCT = 20
) (
  input  logic         clk,
  input  logic         mem_rd_valid,
  output logic         mem_rd_ready,
  input  logic [31:0]  mem_rd_addr,
  output logic         mem_rsp_valid,
  output logic [31:0]  mem_rsp_addr,
  output logic [127:0] mem_rsp_data,
  input  logic         mem_wr_valid,
  output logic         mem_wr_ready,
  input  logic [31:0]  mem_wr_addr,
  input  logic [127:0] mem_wr_data
);
  logic [127:0] mem [logic [31:0]];

  typedef struct {
    logic [31:0] addr;
    int          due;
  } pend_t;

  pend_t pend [$];
  int    cycle = 0;
  int unsigned reads = 0, writes = 0, ooo = 0;

  function automatic logic [127:0] peek(logic [31:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(logic [31:0] a, logic [127:0] d);
    mem[a] = d;
  endfunction

  initial begin
    mem_rd_ready  = 1'b0;
    mem_wr_ready  = 1'b0;
    mem_rsp_valid = 1'b0;
    mem_rsp_addr  = '0;
    mem_rsp_data  = '0;
  end

  always @(posedge clk) begin
    int    due_idx [$];
    int    pick;
    due_idx.delete();
    cycle++;
    // accept requests presented in the cycle that just ended
    if (mem_rd_valid && mem_rd_ready) begin
      pend_t p;
      p.addr = mem_rd_addr;
      p.due  = cycle + MIN_LAT + int'($urandom_range(MAX_LAT - MIN_LAT));
      pend.push_back(p);
      reads++;
    end
    if (mem_wr_valid && mem_wr_ready) begin
      mem[mem_wr_addr] = mem_wr_data;
      writes++;
    end
    // return one due read, chosen at random
    mem_rsp_valid <= 1'b0;
    foreach (pend[i]) if (pend[i].due <= cycle) due_idx.push_back(i);
    if (due_idx.size() != 0) begin
      pick = due_idx[$urandom_range(due_idx.size() - 1)];
      if (pick != due_idx[0]) ooo++;
      mem_rsp_valid <= 1'b1;
      mem_rsp_addr  <= pend[pick].addr;
      mem_rsp_data  <= peek(pend[pick].addr);
      pend.delete(pick);
    end
    mem_rd_ready <= ($urandom_range(99) >= RD_STALL_PCT);
    mem_wr_ready <= ($urandom_range(99) >= WR_STALL_PCT);
  end

endmodule
