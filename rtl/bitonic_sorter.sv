// bitonic_sorter: sort unit of the update application unit, an N-value bitonic network.
//
// Values are loaded one per cycle into an N-entry register array; 'clr' first sets every
// entry to all ones, a padding key that sorts last, so fewer than N values can be sorted.
// After 'start' the unit runs the stages of a bitonic sorting network, one stage per
// cycle, with N compare-exchange operations in parallel: for merge size k = 2, 4, ..., N
// and distance j = k/2, ..., 1, element i is compared with element i XOR j; the pair
// is put in ascending order when bit k of i is clear and in descending order
// otherwise. Each such pass turns pairs of sorted runs into bitonic sequences (first
// half rising, second half falling) and merges them. The full sort takes
// log2(N)*(log2(N)+1)/2 cycles (55 for N = 1024) and ends with a one-cycle 'done'; the
// sorted array is read through the combinational port rd_idx/rd_data.
//
// From the paper: a 1024-value bitonic sorter built from a network of comparators.
// This design's own choice: a stage-serial network (one stage per cycle, one comparator
// per cell reused for every stage) rather than all stages laid out in hardware, and the key width.
module bitonic_sorter #(
  parameter int unsigned N = 1024,
  parameter int unsigned W = 33
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 ld_en,
  input  logic [$clog2(N)-1:0] ld_idx,
  input  logic [W-1:0]         ld_data,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  logic [$clog2(N)-1:0] rd_idx,
  output logic [W-1:0]         rd_data
);
  localparam int unsigned LN = $clog2(N);
  localparam int unsigned SW = $clog2(LN + 1);

  logic [W-1:0]  d [N];   // d[i] is the register of cell i
  logic [SW-1:0] ks;   // log2 of the merge size k
  logic [SW-1:0] js;   // log2 of the compare distance j

  assign rd_data = d[rd_idx];

  // One compare-exchange cell per element: it picks its partner (i XOR 2^js) through a
  // log2(N)-way mux and keeps the lower or the higher of the pair.
  for (genvar i = 0; i < N; i++) begin : g_cell
    localparam logic [LN:0] IDX = (LN+1)'(i);
    logic [LN-1:0][W-1:0] partners;
    logic [W-1:0]         q, b;
    logic                 lower, asc, swap;
    for (genvar s = 0; s < LN; s++) begin : g_p
      assign partners[s] = d[i ^ (1 << s)];
    end
    assign d[i]  = q;
    assign b     = partners[js];
    assign lower = !IDX[js];
    assign asc   = !IDX[ks];
    // keep b when this element should hold the smaller value and b is smaller, or the
    // larger value and b is larger
    assign swap  = (lower == asc) ? (b < q) : (b > q);

    always_ff @(posedge clk) begin
      if (busy) begin
        if (swap) q <= b;
      end else if (clr) begin
        q <= '1;
      end else if (ld_en && ld_idx == LN'(i)) begin
        q <= ld_data;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ks   <= '0;
      js   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        ks   <= SW'(1);
        js   <= '0;
      end else if (busy) begin
        if (js == '0) begin
          if (ks == SW'(LN)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            ks <= ks + 1'b1;
            js <= ks;
          end
        end else begin
          js <= js - 1'b1;
        end
      end
    end
  end

endmodule
