// olsc_ctrl: scheduler of the path-overlapped list decoder.
//
// A "leader" walks the tree SC schedule of path 0, one stage activation per
// cycle: bit 0 takes f steps at stages M..1; every later bit i takes a g step
// at stage ctz(i)+1 and f steps down to stage 1 (for N = 8 the sequence is
// 3 2 1 1 2 1 1 3 2 1 1 2 1 1). Its step words go down a delay line, so list
// path p performs exactly the steps of path 0, p cycles later: the paths
// overlap in the one shared SC decoder with a one-cycle lag each.
// A stage-1 step completes a bit and carries the decision mode:
//  - frozen bit (not the last): DM_LOCAL, each path takes 0 on its own;
//  - information bit while 2*lcur <= L: DM_SPAWN, each path doubles and the
//    following steps carry the doubled path count, so the new paths join
//    the overlap behind the old ones without any stall;
//  - information bit with a full list, or the last bit: DM_SORT. The leader
//    then stalls for lcur-1 cycles (the path waiting latency, filled with
//    bubbles) while the later paths finish the bit and feed the sorter, and
//    spends one cycle on sort-and-copy (sc_en) before the next bit.
// For (N, k) = (8, 4) with information bits 3, 5, 6, 7 this gives 20 busy
// cycles at L = 2 and 22 at L = 4, the schedules drawn in the paper. In
// general busy cycles = (2N - 2) + (k - log2 L) * L when the last bit is an
// information bit: the SC steps, the (k - log2 L)(L - 1) overlap cycles of the
// paper's latency equation, and one sort-and-copy cycle per sorted bit.
//
// With PLCAS = 1 (path-LLR-compute-ahead), a sorted bit does not stall: each
// path provisionally keeps its better extension (the hard decision) and the
// leader goes on issuing the next bit's steps, holding only before that bit's
// decision step. Once all candidates are in the sorter, spec_ok says whether
// the L survivors are exactly the L provisional extensions; then the work is
// kept and no cycle is lost (spec_hit). Otherwise that cycle is the
// sort-and-copy, the speculative steps still in the delay line are dropped and
// the next bit restarts, so the cost is that of the plain scheme.
// Interface: `start` (in S_IDLE) latches the frozen mask (1 = frozen) and
// begins; `busy` is high from the first step to the final sort-and-copy;
// `done` pulses one cycle after it. `sort_count` is the number of valid
// survivors, taken as the new path count at sort-and-copy.
module olsc_ctrl
  import olsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L     = 4,
  parameter bit          PLCAS = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [N-1:0]     frozen,
  input  logic [PTH_W-1:0] sort_count,
  input  logic             spec_ok,
  output step_t            step  [L],
  output logic             sc_en,
  output logic             spec_hit,
  output logic             stall,
  output logic             busy,
  output logic             done,
  output logic [PTH_W-1:0] lcur
);
  localparam int unsigned M = $clog2(N);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_WAIT, S_SC, S_SPEC, S_DONE} state_e;
  state_e           state;
  logic [IDX_W-1:0] bit_i;
  logic [STG_W-1:0] stg;
  logic             is_g;
  logic [PTH_W-1:0] wcnt;
  logic             final_sc;
  logic [N-1:0]     fz;
  step_t            w0;
  step_t            dl [L];
  logic             issue, spec_fail;

  // In S_SPEC the leader keeps issuing the next bit's steps while the sorter
  // fills, but holds before that bit's decision step. When the last path has
  // pushed (wcnt = 0) the guess is either confirmed (spec_ok: carry on) or the
  // cycle becomes a sort-and-copy that flushes the speculative steps.
  assign issue     = (state == S_RUN) ||
                     (state == S_SPEC && ((wcnt != '0 && stg != STG_W'(1)) || (wcnt == '0 && spec_ok)));
  assign spec_fail = (state == S_SPEC) && (wcnt == '0) && !spec_ok;
  assign spec_hit  = (state == S_SPEC) && (wcnt == '0) && spec_ok;

  function automatic logic [STG_W-1:0] first_stage(input logic [IDX_W-1:0] i);
    logic [STG_W-1:0] s;
    logic             found;
    s     = STG_W'(M);
    found = 1'b0;
    for (int unsigned j = 0; j < M; j++)
      if (!found && i[j]) begin
        s     = STG_W'(j + 1);
        found = 1'b1;
      end
    return s;
  endfunction

  always_comb begin
    w0        = '0;
    w0.valid  = issue;
    w0.stage  = stg;
    w0.is_g   = is_g;
    w0.idx    = bit_i;
    w0.frozen = fz[bit_i % N];
    w0.lcur   = lcur;
    w0.mode   = DM_LOCAL;
    if (stg == STG_W'(1)) begin
      if (bit_i == IDX_W'(N - 1) || (!w0.frozen && lcur >= PTH_W'(L))) w0.mode = DM_SORT;
      else if (!w0.frozen)                                              w0.mode = DM_SPAWN;
    end
  end

  assign dl[0] = w0;
  for (genvar p = 0; p < L; p++) begin : g_out
    assign step[p] = (dl[p].valid && PTH_W'(p) < dl[p].lcur) ? dl[p] : '0;
  end
  for (genvar p = 1; p < L; p++) begin : g_dl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) dl[p] <= '0;
      else        dl[p] <= spec_fail ? '0 : dl[p-1];
    end
  end

  assign sc_en = (state == S_SC) || spec_fail;
  assign stall = (state == S_WAIT) || (state == S_SPEC && !issue && !spec_fail);
  assign busy  = (state == S_RUN) || (state == S_WAIT) || (state == S_SC) || (state == S_SPEC);
  assign done  = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bit_i    <= '0;
      stg      <= '0;
      is_g     <= 1'b0;
      lcur     <= PTH_W'(1);
      wcnt     <= '0;
      final_sc <= 1'b0;
      fz       <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          fz    <= frozen;
          bit_i <= '0;
          stg   <= STG_W'(M);
          is_g  <= 1'b0;
          lcur  <= PTH_W'(1);
          state <= S_RUN;
        end
        S_RUN, S_SPEC: begin
          if (state == S_SPEC) begin
            if (wcnt != '0) begin
              wcnt <= wcnt - PTH_W'(1);
            end else begin
              state <= S_RUN;
              if (!spec_ok) begin
                // discard: restart the bit after the sorted one
                lcur <= sort_count;
                stg  <= first_stage(bit_i);
                is_g <= 1'b1;
              end
            end
          end
          if (issue) begin
            if (stg != STG_W'(1)) begin
              stg  <= stg - STG_W'(1);
              is_g <= 1'b0;
            end else begin
              bit_i <= bit_i + IDX_W'(1);
              stg   <= first_stage(bit_i + IDX_W'(1));
              is_g  <= 1'b1;
              if (w0.mode == DM_SPAWN) lcur <= lcur << 1;
              if (w0.mode == DM_SORT) begin
                final_sc <= (bit_i == IDX_W'(N - 1));
                wcnt     <= lcur - PTH_W'(1);
                if (PLCAS && bit_i != IDX_W'(N - 1) && lcur > PTH_W'(1))
                  state <= S_SPEC;
                else
                  state <= (lcur > PTH_W'(1)) ? S_WAIT : S_SC;
              end
            end
          end
        end
        S_WAIT: begin
          wcnt <= wcnt - PTH_W'(1);
          if (wcnt == PTH_W'(1)) state <= S_SC;
        end
        S_SC: begin
          lcur  <= sort_count;
          state <= final_sc ? S_DONE : S_RUN;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Only one path reaches a given step word per cycle, so at most one path
  // spawns or pushes to the sorter in a cycle.
  always_ff @(posedge clk) begin
    if (rst_n && state == S_RUN)
      assert (lcur <= PTH_W'(L)) else $error("path count above list size");
  end
endmodule
