// olsc_sc_core: the single tree SC decoder shared by all list paths.
//
// The tree has M = log2(N) stages; stage s (s = 1 at the bit side) has
// 2^(s-1) PUs and turns the 2^s LLRs of a stage-(s+1) node (the channel LLRs
// for s = M) into the 2^(s-1) LLRs of its child. Each list path keeps its own
// inner LLRs and partial sums (in olsc_llr_ps_mem); the PUs are shared. The
// scheduler gives path p the same step sequence as path 0, p cycles later, so
// in one cycle different paths occupy different stages. Where several paths
// need the same stage in the same cycle, duplicated copies of that stage's PU
// array serve them: stage s has max(1, L >> (s-1)) copies, which is the
// duplication plan of the paper's architecture figure (list size 2: stage 1
// doubled; list size 4: stage 1 four times, stage 2 twice).
//
// Each cycle the paths that request stage s are given copies 0, 1, ... in path
// order. A copy multiplexes in the requesting path's parent-node LLRs and
// partial sums and its output goes back to that path's buffer (stage >= 2) or,
// for stage 1, out as the path's bit LLR for the metric computation. The
// block is purely combinational: buffers are written at the next clock edge by
// the memory. `overflow` flags a cycle in which a stage would need more copies
// than exist; the schedule of this design never causes it.
module olsc_sc_core
  import olsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 4
) (
  input  step_t            step    [L],
  input  llr_t             chan    [N],
  input  llr_t             bufs    [L][N-2],
  input  logic [N-2:0]     ps      [L],
  output logic             wr_en   [L],
  output logic [STG_W-1:0] wr_stage[L],
  output llr_t             wr_data [L][N/2],
  output logic             bit_valid[L],
  output llr_t             bit_llr [L],
  output logic [L-1:0]     on_dup,
  output logic             overflow
);
  localparam int unsigned M = $clog2(N);

  int unsigned alloc     [M+1][L];
  int unsigned path_copy [L];
  llr_t        stage_out [M+1][L][N/2];

  // copy allocation: the k-th path (in path order) requesting stage s gets copy k
  always_comb begin
    int unsigned cnt;
    overflow = 1'b0;
    for (int unsigned s = 0; s <= M; s++)
      for (int unsigned c = 0; c < L; c++) alloc[s][c] = 0;
    for (int unsigned p = 0; p < L; p++) path_copy[p] = 0;
    for (int unsigned s = 1; s <= M; s++) begin
      cnt = 0;
      for (int unsigned p = 0; p < L; p++) begin
        if (step[p].valid && step[p].stage == STG_W'(s)) begin
          path_copy[p] = cnt;
          if (cnt < L) alloc[s][cnt] = p;
          cnt++;
        end
      end
      if (cnt > stage_copies(L, s)) overflow = 1'b1;
    end
  end

  for (genvar c = 0; c < L; c++) begin : g_s0
    for (genvar j = 0; j < N/2; j++) begin : g_z
      assign stage_out[0][c][j] = '0;
    end
  end

  for (genvar s = 1; s <= M; s++) begin : g_stage
    localparam int unsigned P = 1 << (s - 1);
    localparam int unsigned C = stage_copies(L, s);
    for (genvar c = 0; c < L; c++) begin : g_copy
      if (c < C) begin : g_pu_array
        llr_t         in_v  [2*P];
        logic [P-1:0] ps_v;
        logic         g_v;
        llr_t         out_v [P];
        always_comb begin
          int unsigned sel;
          sel = alloc[s][c];
          for (int unsigned j = 0; j < 2*P; j++) begin
            if (s == M) in_v[j] = chan[j];
            else        in_v[j] = bufs[sel][(buf_off(s+1) + j) % (N-2)];
          end
          for (int unsigned j = 0; j < P; j++) ps_v[j] = ps[sel][ps_off(s) + j];
          g_v = step[sel].is_g;
        end
        olsc_stage #(.P(P)) u_stage (
          .llr_in (in_v),
          .ps     (ps_v),
          .is_g   (g_v),
          .llr_out(out_v)
        );
        for (genvar j = 0; j < N/2; j++) begin : g_o
          if (j < P) begin : g_d
            assign stage_out[s][c][j] = out_v[j];
          end else begin : g_z
            assign stage_out[s][c][j] = '0;
          end
        end
      end else begin : g_none
        for (genvar j = 0; j < N/2; j++) begin : g_z
          assign stage_out[s][c][j] = '0;
        end
      end
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < L; p++) begin
      int unsigned s;
      s = (step[p].stage > STG_W'(M)) ? 0 : int'(step[p].stage);
      wr_en[p]     = step[p].valid && (s >= 2);
      wr_stage[p]  = step[p].stage;
      wr_data[p]   = stage_out[s][path_copy[p] % L];
      bit_valid[p] = step[p].valid && (s == 1);
      bit_llr[p]   = stage_out[1][path_copy[p] % L][0];
      on_dup[p]    = step[p].valid && (path_copy[p] != 0);
    end
  end

endmodule
