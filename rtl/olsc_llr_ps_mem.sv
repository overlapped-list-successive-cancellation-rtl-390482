// olsc_llr_ps_mem: the LLR and partial-sum memory of the list decoder.
//
// Holds the channel LLRs (shared by all paths), and for each of the L paths
// its inner LLR buffers (stages 2..M, N-2 entries, stage s at offset
// 2^(s-1)-2) and its partial-sum registers (N-1 bits, see olsc_psum_gen).
// All state is registers, written at the rising clock edge:
//  - load: channel LLRs are clamped to the symmetric LLR range and stored;
//  - wr_*: a path stores the stage output of the shared SC decoder;
//  - ps_*: a path's partial sums are advanced by its own decided bit;
//  - spawn_*: a new path is created as a copy of spawn_src whose partial sums
//    take spawn_bit instead (list not yet full);
//  - sc_*: the sort-and-copy step: every path p becomes a copy of survivor
//    parent sc_parent[p] extended by sc_bit[p] ("LLR copying").
// sc_* overrides everything else in its cycle; spawn overrides the ps_*/wr_*
// of its destination path. The copy is whole-state in one cycle, the simplest
// way to do what the paper calls LLR copying.
module olsc_llr_ps_mem
  import olsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  llr_t             chan_in  [N],
  input  logic             wr_en    [L],
  input  logic [STG_W-1:0] wr_stage [L],
  input  llr_t             wr_data  [L][N/2],
  input  logic             ps_en    [L],
  input  logic [IDX_W-1:0] ps_idx   [L],
  input  logic             ps_bit   [L],
  input  logic             spawn_en,
  input  logic [PTH_W-1:0] spawn_src,
  input  logic [PTH_W-1:0] spawn_dst,
  input  logic [IDX_W-1:0] spawn_idx,
  input  logic             spawn_bit,
  input  logic             sc_en,
  input  logic [PTH_W-1:0] sc_parent[L],
  input  logic             sc_bit   [L],
  input  logic [IDX_W-1:0] sc_idx,
  output llr_t             chan     [N],
  output llr_t             bufs     [L][N-2],
  output logic [N-2:0]     ps       [L]
);
  localparam int unsigned M = $clog2(N);

  logic [N-2:0]     gen_in  [L];
  logic [IDX_W-1:0] gen_idx [L];
  logic             gen_bit [L];
  logic [N-2:0]     gen_out [L];
  logic             gen_we  [L];

  always_comb begin
    for (int unsigned p = 0; p < L; p++) begin
      if (sc_en) begin
        gen_in[p]  = ps[sc_parent[p] % L];
        gen_idx[p] = sc_idx;
        gen_bit[p] = sc_bit[p];
        gen_we[p]  = 1'b1;
      end else if (spawn_en && spawn_dst == PTH_W'(p)) begin
        gen_in[p]  = ps[spawn_src % L];
        gen_idx[p] = spawn_idx;
        gen_bit[p] = spawn_bit;
        gen_we[p]  = 1'b1;
      end else begin
        gen_in[p]  = ps[p];
        gen_idx[p] = ps_idx[p];
        gen_bit[p] = ps_bit[p];
        gen_we[p]  = ps_en[p];
      end
    end
  end

  for (genvar p = 0; p < L; p++) begin : g_gen
    olsc_psum_gen #(.N(N)) u_psum (
      .ps_in  (gen_in[p]),
      .idx    (gen_idx[p]),
      .bit_val(gen_bit[p]),
      .ps_out (gen_out[p])
    );
  end

  // next state of the inner LLR buffers
  llr_t bufs_nxt [L][N-2];
  always_comb begin
    bufs_nxt = bufs;
    for (int unsigned p = 0; p < L; p++) begin
      if (sc_en) begin
        bufs_nxt[p] = bufs[sc_parent[p] % L];
      end else if (spawn_en && spawn_dst == PTH_W'(p)) begin
        bufs_nxt[p] = bufs[spawn_src % L];
      end else if (wr_en[p]) begin
        for (int unsigned s = 2; s <= M; s++)
          if (wr_stage[p] == STG_W'(s))
            for (int unsigned k = 0; k < N/2; k++)
              if (k < (1 << (s - 1))) bufs_nxt[p][buf_off(s) + k] = wr_data[p][k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < N; k++) chan[k] <= '0;
      for (int unsigned p = 0; p < L; p++) begin
        ps[p] <= '0;
        for (int unsigned k = 0; k < N-2; k++) bufs[p][k] <= '0;
      end
    end else begin
      if (load)
        for (int unsigned k = 0; k < N; k++)
          chan[k] <= (chan_in[k] < LLR_MIN) ? LLR_MIN : chan_in[k];
      for (int unsigned p = 0; p < L; p++)
        if (gen_we[p]) ps[p] <= gen_out[p];
      bufs <= bufs_nxt;
    end
  end
endmodule
