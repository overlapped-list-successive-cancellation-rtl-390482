// tb_olsc_llr_ps_mem: random channel loads, stage-buffer writes, partial-sum
// updates, path spawns and sort-and-copy steps on an N = 16, L = 4 memory,
// against a model kept here. The model advances partial sums by re-encoding
// the most recent left subtree from a per-path history of decided bits, so it
// does not share the generator's incremental scheme; the history follows the
// same copy rules as the memory. Bits are decided in order 0..N-1 per path.
module tb_olsc_llr_ps_mem;
  import olsc_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned L = 4;
  localparam int unsigned M = 4;
  logic clk = 0, rst_n = 0, load = 0, spawn_en = 0, sc_en = 0, spawn_bit = 0;
  llr_t chan_in [N], chan [N];
  logic wr_en [L], ps_en [L], ps_bit [L], sc_bit [L];
  logic [STG_W-1:0] wr_stage [L];
  llr_t wr_data [L][N/2];
  logic [IDX_W-1:0] ps_idx [L], spawn_idx, sc_idx;
  logic [PTH_W-1:0] spawn_src, spawn_dst, sc_parent [L];
  llr_t bufs [L][N-2];
  logic [N-2:0] ps [L];
  int checks = 0, failures = 0;

  int mb [L][N-2], nb [L][N-2];
  int mch [N];
  bit hu [L][N], nh [L][N];
  int nx [L], nnx [L];   // next bit index per path

  always #5 clk = ~clk;
  olsc_llr_ps_mem #(.N(N), .L(L)) dut (.clk, .rst_n, .load, .chan_in, .wr_en, .wr_stage, .wr_data,
    .ps_en, .ps_idx, .ps_bit, .spawn_en, .spawn_src, .spawn_dst, .spawn_idx, .spawn_bit,
    .sc_en, .sc_parent, .sc_bit, .sc_idx, .chan, .bufs, .ps);

  // expected partial-sum register of stage s for a path that decided bits 0..n-1
  function automatic bit exp_ps(int p, int s, int j, int n);
    bit x [N];
    int half = 1 << (s - 1), a;
    // most recent completed left child at this stage
    a = -1;
    for (int c = 0; c + half <= n; c += 2 * half) a = c;
    if (a < 0) return 0;
    for (int k = 0; k < half; k++) x[k] = hu[p][a+k];
    for (int h = 1; h < half; h = h * 2)
      for (int k = 0; k < half; k++)
        if ((k & h) == 0) x[k] = x[k] ^ x[k+h];
    return x[j];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sidx;
    for (int p = 0; p < L; p++) begin
      wr_en[p] = 0; ps_en[p] = 0; ps_bit[p] = 0; sc_bit[p] = 0; wr_stage[p] = 2;
      ps_idx[p] = 0; sc_parent[p] = 0; nx[p] = 0;
      for (int j = 0; j < N/2; j++) wr_data[p][j] = 0;
      for (int j = 0; j < N-2; j++) mb[p][j] = 0;
      for (int j = 0; j < N; j++) hu[p][j] = 0;
    end
    for (int j = 0; j < N; j++) begin chan_in[j] = 0; mch[j] = 0; end
    spawn_src = 0; spawn_dst = 0; spawn_idx = 0; sc_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      // all paths restart together now and then
      if (t % 50 == 0) begin
        load = 1;
        for (int j = 0; j < N; j++) chan_in[j] = llr_t'($urandom_range(0, 255) - 128);
      end else load = 0;
      sc_en = ($urandom_range(0, 7) == 0) && (t % 50 != 0);
      spawn_en = !sc_en && ($urandom_range(0, 4) == 0);
      spawn_src = PTH_W'($urandom_range(0, L - 1));
      spawn_dst = PTH_W'($urandom_range(0, L - 1));
      spawn_bit = 1'($urandom_range(0, 1));
      spawn_idx = IDX_W'(nx[spawn_src] % N);
      sidx = nx[0] % N;
      sc_idx = IDX_W'(sidx);
      for (int p = 0; p < L; p++) begin
        wr_en[p] = 1'($urandom_range(0, 1));
        wr_stage[p] = STG_W'($urandom_range(2, M));
        for (int j = 0; j < N/2; j++) wr_data[p][j] = llr_t'($urandom_range(0, 254) - 127);
        ps_en[p] = 1'($urandom_range(0, 1));
        ps_bit[p] = 1'($urandom_range(0, 1));
        ps_idx[p] = IDX_W'(nx[p] % N);
        sc_parent[p] = PTH_W'($urandom_range(0, L - 1));
        sc_bit[p] = 1'($urandom_range(0, 1));
      end
      // sort-and-copy needs all parents at the same bit: force it
      if (sc_en) for (int p = 0; p < L; p++) if (nx[p] != nx[0]) sc_en = 0;
      // model
      nb = mb; nh = hu; nnx = nx;
      for (int p = 0; p < L; p++) begin
        if (sc_en) begin
          nb[p] = mb[sc_parent[p]]; nh[p] = hu[sc_parent[p]]; nh[p][sidx] = sc_bit[p]; nnx[p] = nx[sc_parent[p]] + 1;
        end else if (spawn_en && spawn_dst == PTH_W'(p)) begin
          nb[p] = mb[spawn_src]; nh[p] = hu[spawn_src]; nh[p][nx[spawn_src] % N] = spawn_bit; nnx[p] = nx[spawn_src] + 1;
        end else begin
          if (wr_en[p]) for (int j = 0; j < (1 << (wr_stage[p] - 1)); j++)
            nb[p][(1 << (wr_stage[p] - 1)) - 2 + j] = wr_data[p][j];
          if (ps_en[p]) begin nh[p][nx[p] % N] = ps_bit[p]; nnx[p] = nx[p] + 1; end
        end
      end
      if (load) for (int j = 0; j < N; j++) mch[j] = (chan_in[j] == -128) ? -127 : chan_in[j];
      mb = nb; hu = nh; nx = nnx;
      for (int p = 0; p < L; p++) if (nx[p] >= N) nx[p] = N;
      @(negedge clk);
      for (int j = 0; j < N; j++) begin checks++; if (int'(chan[j]) != mch[j]) failures++; end
      for (int p = 0; p < L; p++) begin
        for (int j = 0; j < N-2; j++) begin checks++; if (int'(bufs[p][j]) != mb[p][j]) failures++; end
        if (nx[p] < N) for (int s = 1; s <= M; s++)
          for (int j = 0; j < (1 << (s - 1)); j++) begin
            checks++;
            if (ps[p][(1 << (s - 1)) - 1 + j] != exp_ps(p, s, j, nx[p])) failures++;
          end
      end
      // wrap paths that finished a word back to a fresh start
      if (nx[0] >= N || nx[1] >= N || nx[2] >= N || nx[3] >= N) begin
        for (int p = 0; p < L; p++) begin
          nx[p] = 0;
          for (int j = 0; j < N; j++) hu[p][j] = 0;
        end
        // no clean reset port for partial sums: they restart from whatever a
        // finished word left, so resynchronise the model by a reset pulse
        rst_n = 0; #1; rst_n = 1;
        for (int p = 0; p < L; p++) for (int j = 0; j < N-2; j++) mb[p][j] = 0;
        for (int j = 0; j < N; j++) mch[j] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
