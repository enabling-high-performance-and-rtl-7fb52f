// copy_unit: in-memory copy engine of one vault, also the memory port of the hash
// lookup unit and of the snapshot manager.
//
// A CP_COPY command copies 'len' words from 'src' to 'dst'. NUM_FETCH fetch units split
// the region (unit k takes words k, k+NUM_FETCH, ...) and issue independent reads, so
// many reads are in flight at once. Every read owns an entry of the tracking buffer
// (busy and ready bits, destination address, returned data). Reads may return out of
// order and identify themselves only by their address; a hash index on the address
// (address modulo TRACK_DEPTH, the same modulo hash as the update-shipping index) gives
// the tracking-buffer entry directly, so no buffer scan is needed. Because the entry
// position is the hash of the address, a read is only issued when its entry is free.
// When a read returns, the entry's ready bit is set, and NUM_WB writeback units, each
// owning an interleaved quarter of the entries, write ready entries to the destination
// at once. When all words are written the requester gets a response carrying its ID.
// CP_READ reads one word and forwards it to the requester with its ID; CP_WRITE writes
// one word. A new CP_COPY is accepted only when the previous one has completed; single
// reads and writes are accepted at any time and take priority on the memory ports.
//
// From the paper: fetch and writeback units working in parallel, the tracking buffer of
// address plus ready bit, starting the write as soon as the read returns, and the hash
// index on the address. This design's own choices: the unit counts, TRACK_DEPTH, a
// direct-mapped (stall on conflict) hash index, one read and one write port to the vault
// memory controller, round-robin arbitration.
//
// Memory ports: mem_rd_* request (valid-ready, one per cycle), mem_rsp_* the returned
// word with its address (no back-pressure), mem_wr_* write request (valid-ready).
// Requester ports: cmd_* (valid-ready), rsp_* (one cycle pulse, no back-pressure).
module copy_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_FETCH   = 4,
  parameter int unsigned NUM_WB      = 4,
  parameter int unsigned TRACK_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  copy_cmd_t         cmd,
  output logic              rsp_valid,
  output copy_rsp_t         rsp,
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  input  logic              mem_rsp_valid,
  input  logic [ADDR_W-1:0] mem_rsp_addr,
  input  logic [DATA_W-1:0] mem_rsp_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output logic [DATA_W-1:0] mem_wr_data,
  output logic              busy
);
  localparam int unsigned TW = $clog2(TRACK_DEPTH);
  localparam int unsigned FW = (NUM_FETCH > 1) ? $clog2(NUM_FETCH) : 1;
  localparam int unsigned WW = (NUM_WB > 1) ? $clog2(NUM_WB) : 1;

  typedef struct packed {
    logic              busy;
    logic              ready;
    logic              fwd;     // single read: forward the data to the requester
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] dst;
    logic [DATA_W-1:0] data;
  } track_t;

  track_t            tb [TRACK_DEPTH];

  logic              cp_active;
  logic [ID_W-1:0]   cp_id;
  logic [ADDR_W-1:0] cp_src, cp_dst, cp_len, cp_written;
  logic [ADDR_W-1:0] f_off [NUM_FETCH];
  logic              done_pend;
  logic [FW-1:0]     f_rr;
  logic [WW-1:0]     w_rr;

  function automatic logic [TW-1:0] hidx(logic [ADDR_W-1:0] a);
    return TW'(a % ADDR_W'(TRACK_DEPTH));
  endfunction

  // ---------------- read port ----------------
  logic          single_rd, single_wr, copy_cmd;
  logic          f_cand [NUM_FETCH];
  logic          f_sel_found;
  logic [FW-1:0] f_sel;
  logic          f_fire, single_rd_fire;

  assign single_rd = cmd_valid && cmd.op == CP_READ;
  assign single_wr = cmd_valid && cmd.op == CP_WRITE;
  assign copy_cmd  = cmd_valid && cmd.op == CP_COPY;

  always_comb begin
    for (int k = 0; k < NUM_FETCH; k++)
      f_cand[k] = cp_active && (f_off[k] < cp_len) && !tb[hidx(cp_src + f_off[k])].busy;
    f_sel_found = 1'b0;
    f_sel       = '0;
    for (int i = NUM_FETCH-1; i >= 0; i--) begin
      int k;
      k = (int'(f_rr) + i) % NUM_FETCH;
      if (f_cand[k]) begin
        f_sel_found = 1'b1;
        f_sel       = FW'(k);
      end
    end
  end

  logic single_rd_ok;
  assign single_rd_ok   = !tb[hidx(cmd.src)].busy;
  assign single_rd_fire = single_rd && single_rd_ok && mem_rd_ready;
  assign f_fire         = !(single_rd && single_rd_ok) && f_sel_found && mem_rd_ready;

  always_comb begin
    mem_rd_valid = 1'b0;
    mem_rd_addr  = '0;
    if (single_rd && single_rd_ok) begin
      mem_rd_valid = 1'b1;
      mem_rd_addr  = cmd.src;
    end else if (f_sel_found) begin
      mem_rd_valid = 1'b1;
      mem_rd_addr  = cp_src + f_off[f_sel];
    end
  end

  // ---------------- write port ----------------
  logic          w_cand [NUM_WB];
  logic [TW-1:0] w_slot [NUM_WB];
  logic          w_sel_found;
  logic [WW-1:0] w_sel;
  logic          wb_fire, single_wr_fire;

  always_comb begin
    for (int w = 0; w < NUM_WB; w++) begin
      w_cand[w] = 1'b0;
      w_slot[w] = '0;
      for (int s = TRACK_DEPTH-1; s >= 0; s--)
        if ((s % NUM_WB) == w && tb[s].busy && tb[s].ready && !tb[s].fwd) begin
          w_cand[w] = 1'b1;
          w_slot[w] = TW'(s);
        end
    end
    w_sel_found = 1'b0;
    w_sel       = '0;
    for (int i = NUM_WB-1; i >= 0; i--) begin
      int w;
      w = (int'(w_rr) + i) % NUM_WB;
      if (w_cand[w]) begin
        w_sel_found = 1'b1;
        w_sel       = WW'(w);
      end
    end
  end

  assign single_wr_fire = single_wr && mem_wr_ready;
  assign wb_fire        = !single_wr && w_sel_found && mem_wr_ready;

  always_comb begin
    mem_wr_valid = 1'b0;
    mem_wr_addr  = '0;
    mem_wr_data  = '0;
    if (single_wr) begin
      mem_wr_valid = 1'b1;
      mem_wr_addr  = cmd.dst;
      mem_wr_data  = cmd.wdata;
    end else if (w_sel_found) begin
      mem_wr_valid = 1'b1;
      mem_wr_addr  = tb[w_slot[w_sel]].dst;
      mem_wr_data  = tb[w_slot[w_sel]].data;
    end
  end

  always_comb begin
    cmd_ready = 1'b0;
    unique case (cmd.op)
      CP_READ:  cmd_ready = single_rd_ok && mem_rd_ready;
      CP_WRITE: cmd_ready = mem_wr_ready;
      CP_COPY:  cmd_ready = !cp_active && !done_pend;
      default:  cmd_ready = 1'b0;
    endcase
  end

  // ---------------- responses ----------------
  logic [TW-1:0] rsp_slot;
  logic          fwd_rsp;
  assign rsp_slot = hidx(mem_rsp_addr);
  assign fwd_rsp  = mem_rsp_valid && tb[rsp_slot].fwd;

  always_comb begin
    rsp_valid = 1'b0;
    rsp       = '0;
    if (fwd_rsp) begin
      rsp_valid = 1'b1;
      rsp.id    = tb[rsp_slot].id;
      rsp.data  = mem_rsp_data;
    end else if (done_pend) begin
      rsp_valid = 1'b1;
      rsp.id    = cp_id;
    end
  end

  assign busy = cp_active || done_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < TRACK_DEPTH; s++) tb[s] <= '0;
      for (int k = 0; k < NUM_FETCH; k++) f_off[k] <= '0;
      cp_active  <= 1'b0;
      cp_id      <= '0;
      cp_src     <= '0;
      cp_dst     <= '0;
      cp_len     <= '0;
      cp_written <= '0;
      done_pend  <= 1'b0;
      f_rr       <= '0;
      w_rr       <= '0;
    end else begin
      if (copy_cmd && cmd_ready) begin
        cp_active  <= 1'b1;
        cp_id      <= cmd.id;
        cp_src     <= cmd.src;
        cp_dst     <= cmd.dst;
        cp_len     <= cmd.len;
        cp_written <= '0;
        for (int k = 0; k < NUM_FETCH; k++) f_off[k] <= ADDR_W'(k);
      end

      if (single_rd_fire) begin
        tb[hidx(cmd.src)].busy  <= 1'b1;
        tb[hidx(cmd.src)].ready <= 1'b0;
        tb[hidx(cmd.src)].fwd   <= 1'b1;
        tb[hidx(cmd.src)].id    <= cmd.id;
      end

      if (f_fire) begin
        tb[hidx(cp_src + f_off[f_sel])].busy  <= 1'b1;
        tb[hidx(cp_src + f_off[f_sel])].ready <= 1'b0;
        tb[hidx(cp_src + f_off[f_sel])].fwd   <= 1'b0;
        tb[hidx(cp_src + f_off[f_sel])].id    <= cp_id;
        tb[hidx(cp_src + f_off[f_sel])].dst   <= cp_dst + f_off[f_sel];
        f_off[f_sel] <= f_off[f_sel] + ADDR_W'(NUM_FETCH);
        f_rr         <= (f_sel == FW'(NUM_FETCH-1)) ? '0 : f_sel + 1'b1;
      end

      if (mem_rsp_valid) begin
        if (tb[rsp_slot].fwd) begin
          tb[rsp_slot].busy <= 1'b0;
        end else begin
          tb[rsp_slot].ready <= 1'b1;
          tb[rsp_slot].data  <= mem_rsp_data;
        end
      end

      if (wb_fire) begin
        tb[w_slot[w_sel]].busy <= 1'b0;
        w_rr <= (w_sel == WW'(NUM_WB-1)) ? '0 : w_sel + 1'b1;
      end

      if (cp_active && !(copy_cmd && cmd_ready)) begin
        if ((cp_written + (wb_fire ? 1'b1 : 1'b0)) == cp_len) begin
          cp_active <= 1'b0;
          done_pend <= 1'b1;
        end
        if (wb_fire) cp_written <= cp_written + 1'b1;
      end

      if (done_pend && !fwd_rsp) done_pend <= 1'b0;
    end
  end

  // A returned read must match an outstanding tracking entry.
  a_rsp_tracked: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> tb[rsp_slot].busy);

endmodule
