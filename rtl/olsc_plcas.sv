// olsc_plcas: hit detector of path-LLR-compute-ahead.
//
// With compute-ahead, a path that reaches a sorted bit does not wait for the
// sorter: it provisionally takes its better extension (the hard decision of
// its bit LLR, which leaves its metric unchanged) and goes on into the next
// bit. This unit keeps that provisional bit of every path (`rec` with the
// path's `hard` bit, in the cycle the path pushes its candidates) and, once the
// sorter holds the survivors, says whether the speculation was right:
// spec_ok = 1 when every one of the L survivor slots is valid and is the
// provisional extension of its parent. As two extensions of one parent differ
// in the bit, the L survivors then come from L distinct paths, so every path
// survives as itself and the work done ahead can be kept without any copying.
// Otherwise the controller turns the cycle into a normal sort-and-copy.
// The register is written one cycle after `rec`, like the sorter list, so
// spec_ok is valid in the cycle after the last push. The hit rule (all paths
// survive with their own best extension) is this design's reading of the
// paper's "discard if not a survivor" at the granularity of the whole list.
module olsc_plcas
  import olsc_pkg::*;
#(
  parameter int unsigned L = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rec  [L],
  input  logic  hard [L],
  input  cand_t list [L],
  output logic  spec_ok
);
  logic spec_bit [L];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < L; p++) spec_bit[p] <= 1'b0;
    end else begin
      for (int unsigned p = 0; p < L; p++)
        if (rec[p]) spec_bit[p] <= hard[p];
    end
  end

  always_comb begin
    spec_ok = 1'b1;
    for (int unsigned j = 0; j < L; j++)
      if (!list[j].valid || list[j].bit_val != spec_bit[list[j].parent % L]) spec_ok = 1'b0;
  end
endmodule
