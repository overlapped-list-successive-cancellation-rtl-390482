// olsc_sorter: pipelined sorting module that keeps the L best path candidates.
//
// Because the list paths finish a bit one cycle apart, their candidates reach
// the sorter one path per cycle: on `push` it takes the two extensions of one
// path (cand_a, cand_b) and inserts them into a list of L registers kept in
// ascending metric order; what falls off the end is dropped. After the last
// path has pushed, the list holds the L survivors, survivor 0 being the best.
// Equal metrics keep arrival order, and within one push cand_a goes first.
// `clear` empties the list (taking effect before a push in the same cycle).
// Invalid candidates are ignored. One insertion per cycle keeps the logic to
// two compare-and-shift layers whatever the list size, instead of a full
// 2L-input sorting network; this is the pipelined sorter the paper argues for,
// with the insertion scheme being this design's choice.
module olsc_sorter
  import olsc_pkg::*;
#(
  parameter int unsigned L = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  push,
  input  cand_t cand_a,
  input  cand_t cand_b,
  output cand_t list [L]
);
  typedef cand_t list_t [L];

  function automatic list_t insert(input list_t in, input cand_t c);
    list_t o;
    logic  placed;
    o = in;
    if (!c.valid) return o;
    placed = 1'b0;
    for (int unsigned k = 0; k < L; k++) begin
      if (!placed && (!in[k].valid || in[k].metric > c.metric)) begin
        placed = 1'b1;
        o[k]   = c;
        for (int unsigned j = k + 1; j < L; j++) o[j] = in[j-1];
      end
    end
    return o;
  endfunction

  list_t base, nxt;
  always_comb begin
    base = list;
    if (clear) for (int unsigned k = 0; k < L; k++) base[k] = '0;
    nxt = base;
    if (push) nxt = insert(insert(base, cand_a), cand_b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int unsigned k = 0; k < L; k++) list[k] <= '0;
    else        list <= nxt;
  end
endmodule
