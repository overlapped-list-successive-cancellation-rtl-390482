// olsc_stage: the PU array of one tree stage, P PUs working in parallel.
//
// Combinational. Input is the 2P-entry LLR vector of the parent node; PU j
// combines entries j and j+P (and partial-sum bit j for g) into output j.
// Every PU of the array takes the same f/g selection.
module olsc_stage
  import olsc_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  llr_t       llr_in [2*P],
  input  logic [P-1:0] ps,
  input  logic       is_g,
  output llr_t       llr_out [P]
);
  for (genvar j = 0; j < P; j++) begin : g_pu
    olsc_pu u_pu (
      .a   (llr_in[j]),
      .b   (llr_in[j+P]),
      .ps  (ps[j]),
      .is_g(is_g),
      .y   (llr_out[j])
    );
  end
endmodule
