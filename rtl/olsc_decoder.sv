// olsc_decoder: path-overlapped list successive-cancellation polar decoder.
//
// Decodes one (N, k) polar codeword x = u F^(kron m) with list size L using a
// single tree SC decoder (olsc_sc_core) instead of L copies. The L paths run
// through the shared decoder one clock cycle apart (olsc_ctrl), each with its
// own inner LLRs, partial sums, metric and decided bits. When a path finishes
// a bit, its metrics computation lane (olsc_mcu) forms the metrics of its two
// extensions; while the list is not full the path simply splits, otherwise
// the candidates go, one path per cycle, into the pipelined sorter
// (olsc_sorter). When the last path has pushed, one sort-and-copy cycle makes
// path j a copy of the j-th best candidate in all memories (olsc_llr_ps_mem,
// olsc_pm_mem, olsc_survivor_mem). After bit N-1 path 0 is the best path and
// its bits are the output.
//
// Interface: drive chan_llr (LLR_W-bit signed, positive favours 0) and frozen
// (bit i = 1: u_i frozen to 0) and pulse start while idle; they are sampled at
// that edge. busy is high for the decoding cycles; done pulses once with u_hat
// (all N bits of u, frozen ones included) and best_pm valid, and they stay
// valid until the next start. Counters: stall is high in path waiting cycles,
// sc_en in sort-and-copy cycles, dup_use when some path uses a duplicated PU
// copy, spawn when a path splits without sorting.
// PLCAS = 1 enables path-LLR-compute-ahead (see olsc_ctrl): at a sorted bit
// each path provisionally records its hard decision and goes on; spec_hit
// pulses when the sort confirms all of them. PLCAS = 0, the default, is the
// plain overlapped schedule.
// Latency at the defaults (N = 1024, L = 4): 2046 + 4 (k - 2) cycles when
// u_{N-1} is an information bit.
module olsc_decoder
  import olsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L     = 4,
  parameter bit          PLCAS = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  llr_t         chan_llr [N],
  input  logic [N-1:0] frozen,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] u_hat,
  output pm_t          best_pm,
  output logic         stall,
  output logic         sc_en,
  output logic         dup_use,
  output logic         spawn,
  output logic         spec_hit
);
  step_t            step [L];
  logic [PTH_W-1:0] lcur, sort_count;
  logic             idle_start;

  llr_t             chan [N];
  llr_t             bufs [L][N-2];
  logic [N-2:0]     ps   [L];

  logic             wr_en    [L];
  logic [STG_W-1:0] wr_stage [L];
  llr_t             wr_data  [L][N/2];
  logic             bit_valid[L];
  llr_t             bit_llr  [L];
  logic [L-1:0]     on_dup;
  logic             overflow;

  pm_t              pm  [L];
  pm_t              pm0 [L];
  pm_t              pm1 [L];
  logic             hard[L];

  logic             dec_en  [L];
  logic [IDX_W-1:0] dec_idx [L];
  pm_t              dec_pm  [L];
  logic             dec_bit [L];
  logic             spawn_en;
  logic [PTH_W-1:0] spawn_src, spawn_dst;
  logic [IDX_W-1:0] spawn_idx;
  pm_t              spawn_pm;
  logic             push;
  cand_t            cand_a, cand_b;
  cand_t            list [L];
  logic [PTH_W-1:0] sc_parent [L];
  logic             sc_bit    [L];
  pm_t              sc_pm     [L];
  logic [IDX_W-1:0] sc_idx;
  logic [N-1:0]     u [L];
  logic             spec_rec [L];
  logic             spec_ok;

  assign idle_start = start && !busy && !done;

  olsc_ctrl #(.N(N), .L(L), .PLCAS(PLCAS)) u_ctrl (
    .clk, .rst_n,
    .start     (idle_start),
    .frozen    (frozen),
    .sort_count(sort_count),
    .spec_ok   (spec_ok),
    .step      (step),
    .sc_en     (sc_en),
    .spec_hit  (spec_hit),
    .stall     (stall),
    .busy      (busy),
    .done      (done),
    .lcur      (lcur)
  );

  olsc_sc_core #(.N(N), .L(L)) u_sc (
    .step, .chan, .bufs, .ps,
    .wr_en, .wr_stage, .wr_data,
    .bit_valid, .bit_llr, .on_dup, .overflow
  );

  for (genvar p = 0; p < L; p++) begin : g_mcu
    olsc_mcu u_mcu (
      .lam (bit_llr[p]),
      .pm  (pm[p]),
      .pm0 (pm0[p]),
      .pm1 (pm1[p]),
      .hard(hard[p])
    );
  end

  // Decision handling per path: local frozen decisions, splits, sorter pushes.
  always_comb begin
    spawn_en  = 1'b0;
    spawn_src = '0;
    spawn_dst = '0;
    spawn_idx = '0;
    spawn_pm  = '0;
    push      = 1'b0;
    cand_a    = '0;
    cand_b    = '0;
    for (int unsigned p = 0; p < L; p++) begin
      dec_en[p]  = 1'b0;
      dec_idx[p] = step[p].idx;
      dec_pm[p]  = pm0[p];
      dec_bit[p] = 1'b0;
      if (bit_valid[p]) begin
        unique case (step[p].mode)
          DM_LOCAL: dec_en[p] = 1'b1;
          DM_SPAWN: begin
            dec_en[p] = 1'b1;
            spawn_en  = 1'b1;
            spawn_src = PTH_W'(p);
            spawn_dst = PTH_W'(p) + step[p].lcur;
            spawn_idx = step[p].idx;
            spawn_pm  = pm1[p];
          end
          DM_SORT: begin
            // compute-ahead: provisionally keep the better extension
            if (PLCAS && step[p].idx != IDX_W'(N - 1)) begin
              dec_en[p]  = 1'b1;
              dec_bit[p] = hard[p];
              dec_pm[p]  = hard[p] ? pm1[p] : pm0[p];
            end
            push          = 1'b1;
            cand_a.valid  = 1'b1;
            cand_a.metric = pm0[p];
            cand_a.parent = PTH_W'(p);
            cand_a.bit_val= 1'b0;
            cand_b.valid  = !step[p].frozen;
            cand_b.metric = pm1[p];
            cand_b.parent = PTH_W'(p);
            cand_b.bit_val= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  olsc_sorter #(.L(L)) u_sorter (
    .clk, .rst_n,
    .clear (sc_en || spec_hit),
    .push  (push),
    .cand_a(cand_a),
    .cand_b(cand_b),
    .list  (list)
  );

  always_comb begin
    sort_count = '0;
    for (int unsigned p = 0; p < L; p++) begin
      sc_parent[p] = list[p].parent;
      sc_bit[p]    = list[p].bit_val;
      sc_pm[p]     = list[p].metric;
      if (list[p].valid) sort_count = sort_count + PTH_W'(1);
    end
  end

  // compute-ahead: provisional decision of each path at a sorted bit, and
  // whether the sorted survivors are exactly these provisional extensions
  always_comb
    for (int unsigned p = 0; p < L; p++)
      spec_rec[p] = bit_valid[p] && step[p].mode == DM_SORT;

  olsc_plcas #(.L(L)) u_plcas (
    .clk, .rst_n,
    .rec    (spec_rec),
    .hard   (hard),
    .list   (list),
    .spec_ok(spec_ok)
  );

  // bit index of the sort-and-copy: the bit the sorted paths last decided
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sc_idx <= '0;
    else if (push) sc_idx <= cand_a.valid ? step[cand_a.parent % L].idx : sc_idx;
  end

  olsc_llr_ps_mem #(.N(N), .L(L)) u_mem (
    .clk, .rst_n,
    .load     (idle_start),
    .chan_in  (chan_llr),
    .wr_en, .wr_stage, .wr_data,
    .ps_en    (dec_en),
    .ps_idx   (dec_idx),
    .ps_bit   (dec_bit),
    .spawn_en, .spawn_src, .spawn_dst, .spawn_idx,
    .spawn_bit(1'b1),
    .sc_en, .sc_parent, .sc_bit, .sc_idx,
    .chan, .bufs, .ps
  );

  olsc_pm_mem #(.L(L)) u_pm (
    .clk, .rst_n,
    .init  (idle_start),
    .dec_en, .dec_pm,
    .spawn_en, .spawn_dst, .spawn_pm,
    .sc_en, .sc_pm,
    .pm
  );

  olsc_survivor_mem #(.N(N), .L(L)) u_surv (
    .clk, .rst_n,
    .init     (idle_start),
    .dec_en, .dec_idx, .dec_bit,
    .spawn_en, .spawn_src, .spawn_dst, .spawn_idx,
    .spawn_bit(1'b1),
    .sc_en, .sc_parent, .sc_bit, .sc_idx,
    .u,
    .u_best   (u_hat)
  );

  assign best_pm = pm[0];
  assign dup_use = |on_dup;
  assign spawn   = spawn_en;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!overflow) else $error("more paths on one stage than PU copies");
      assert ($countones(on_dup) <= L) else $error("bad copy use");
    end
  end
endmodule
