// olsc_psum_gen: partial-sum generator of one list path.
//
// A path keeps, for every stage s = 1..M, a register of 2^(s-1) partial sums:
// the re-encoded bits of the most recently completed left subtree of that
// stage, which is what a g step at stage s needs. The registers are packed in
// one N-1 bit vector, stage s at offset 2^(s-1)-1.
// When bit u_idx is decided as `bit_val`, the generator walks up the tree from
// the bit: while idx has a 1 at level j, the node just finished is a right
// child and is merged with its stored left sibling into beta = {left ^ beta,
// beta}; at the first 0 at level j the node is a left child and beta is stored
// as the stage-(j+1) register. This is x = u F^(kron) applied incrementally.
// Combinational; the caller registers ps_out.
module olsc_psum_gen
  import olsc_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic [N-2:0]     ps_in,
  input  logic [IDX_W-1:0] idx,
  input  logic             bit_val,
  output logic [N-2:0]     ps_out
);
  localparam int unsigned M = $clog2(N);

  always_comb begin
    logic [N/2-1:0] beta, nb;
    logic           done;
    ps_out  = ps_in;
    beta    = '0;
    nb      = '0;
    beta[0] = bit_val;
    done    = 1'b0;
    for (int unsigned j = 0; j < M; j++) begin
      if (!done) begin
        if (!idx[j]) begin
          for (int unsigned k = 0; k < N/2; k++)
            if (k < (1 << j)) ps_out[ps_off(j+1) + k] = beta[k];
          done = 1'b1;
        end else if (j < M - 1) begin
          nb = '0;
          for (int unsigned k = 0; k < N/4; k++)
            if (k < (1 << j)) begin
              nb[k]            = ps_in[ps_off(j+1) + k] ^ beta[k];
              nb[k + (1 << j)] = beta[k];
            end
          beta = nb;
        end
      end
    end
  end
endmodule
