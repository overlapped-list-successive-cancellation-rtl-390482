// tb_olsc_decoder: end-to-end testbench of olsc_decoder at reduced size (N = 32, L = 4).
//
// Every frame gets a random frozen set (or a fixed one) and channel LLRs that
// are either random or a noisy BPSK image of a random codeword. The expected
// output comes from a behavioural list SC decoder written here in a different
// way from the RTL: each bit LLR of each path is recomputed from scratch down
// the tree, re-encoding the left subtrees directly from the path's decided
// bits, with the same fixed-point rules (min-sum f, saturated g, metric +|LLR|
// for a decision against the sign, stable ascending sort, survivor j to path
// j). Checks: decoded word, best metric, busy cycle count against
// (2N-2) + sum over sorted bits of the live path count, and that the stall,
// sort-and-copy, duplicated-PU, spawn and frozen-bit mechanisms all occurred.
module tb_olsc_decoder;
  import olsc_pkg::*;
  localparam int unsigned N = 32;
  localparam int unsigned L = 4;
  localparam int unsigned M = $clog2(N);
  localparam int FRAMES = 40;
  localparam bit PLC = 1'b0;
  localparam int LMAX = (1 << (LLR_W - 1)) - 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  llr_t chan_llr [N];
  logic [N-1:0] frozen;
  logic busy, done, stall, sc_en, dup_use, spawn, spec_hit;
  logic [N-1:0] u_hat;
  pm_t best_pm;

  always #5 clk = ~clk;

  olsc_decoder #(.N(N), .L(L)) dut (
    .clk, .rst_n, .start, .chan_llr, .frozen, .busy, .done, .u_hat, .best_pm,
    .stall, .sc_en, .dup_use, .spawn, .spec_hit
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_sc = 0, n_dup = 0, n_spawn = 0, n_frozen = 0;
  int n_hit = 0, r_hit = 0, r_miss = 0;
  int cyc;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int ch [N];
  bit ru [L][N];
  int rpm [L];
  int lc;
  int exp_cycles;

  function automatic int sat(input int v);
    if (v > LMAX) return LMAX;
    if (v < -LMAX) return -LMAX;
    return v;
  endfunction
  function automatic int fmin(input int a, input int b);
    int ma = (a < 0) ? -a : a;
    int mb = (b < 0) ? -b : b;
    int m = (ma < mb) ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction
  function automatic int pmsat(input int v);
    return (v > 65535) ? 65535 : v;
  endfunction

  // LLR of bit i on path p, recomputed from the channel
  function automatic int ref_llr(input int p, input int i);
    int alpha [N];
    int nxt [N];
    bit x [N];
    int size, half, a;
    for (int j = 0; j < N; j++) alpha[j] = ch[j];
    size = N;
    for (int s = M; s >= 1; s--) begin
      half = size / 2;
      a = (i / size) * size;
      if (((i >> (s - 1)) & 1) == 0) begin
        for (int j = 0; j < half; j++) nxt[j] = fmin(alpha[j], alpha[j+half]);
      end else begin
        for (int j = 0; j < half; j++) x[j] = ru[p][a+j];
        for (int h = 1; h < half; h = h * 2)
          for (int j = 0; j < half; j++)
            if ((j & h) == 0) x[j] = x[j] ^ x[j+h];
        for (int j = 0; j < half; j++)
          nxt[j] = sat(x[j] ? alpha[j+half] - alpha[j] : alpha[j+half] + alpha[j]);
      end
      for (int j = 0; j < half; j++) alpha[j] = nxt[j];
      size = half;
    end
    return alpha[0];
  endfunction

  task automatic ref_decode();
    int lam [L];
    int cm [2*L];
    int cp [2*L];
    bit cb [2*L];
    int nc, t, ti;
    bit tb;
    bit nu [L][N];
    bit hd [L];
    bit hit;
    int fs;
    int npm [L];
    lc = 1;
    rpm[0] = 0;
    for (int j = 0; j < N; j++) ru[0][j] = 0;
    exp_cycles = 2 * N - 2;
    for (int i = 0; i < N; i++) begin
      for (int p = 0; p < lc; p++) lam[p] = ref_llr(p, i);
      if (frozen[i] && i != N - 1) begin
        n_frozen++;
        for (int p = 0; p < lc; p++) begin
          ru[p][i] = 0;
          if (lam[p] < 0) rpm[p] = pmsat(rpm[p] - lam[p]);
        end
      end else if (!frozen[i] && 2 * lc <= L && i != N - 1) begin
        for (int p = 0; p < lc; p++) begin
          for (int j = 0; j < N; j++) ru[p+lc][j] = ru[p][j];
          ru[p+lc][i] = 1;
          ru[p][i] = 0;
          rpm[p+lc] = (lam[p] >= 0) ? pmsat(rpm[p] + lam[p]) : rpm[p];
          if (lam[p] < 0) rpm[p] = pmsat(rpm[p] - lam[p]);
        end
        lc = 2 * lc;
      end else begin
        nc = 0;
        for (int p = 0; p < lc; p++) begin
          cm[nc] = (lam[p] < 0) ? pmsat(rpm[p] - lam[p]) : rpm[p];
          cp[nc] = p; cb[nc] = 0; nc++;
          if (!frozen[i]) begin
            cm[nc] = (lam[p] >= 0) ? pmsat(rpm[p] + lam[p]) : rpm[p];
            cp[nc] = p; cb[nc] = 1; nc++;
          end
        end
        // stable insertion sort, ascending
        for (int q = 1; q < nc; q++) begin
          for (int r = q; r > 0 && cm[r-1] > cm[r]; r--) begin
            t = cm[r]; cm[r] = cm[r-1]; cm[r-1] = t;
            ti = cp[r]; cp[r] = cp[r-1]; cp[r-1] = ti;
            tb = cb[r]; cb[r] = cb[r-1]; cb[r-1] = tb;
          end
        end
        if (nc > L) nc = L;
        // compute-ahead: a hit when the survivors are every path's better
        // extension; the paths then stay in place
        hit = PLC && i != N - 1 && nc == lc;
        for (int p = 0; p < lc; p++) hd[p] = (lam[p] < 0);
        for (int q = 0; q < nc; q++) if (cb[q] != hd[cp[q]]) hit = 0;
        if (hit) begin
          r_hit++;
          fs = M;
          for (int b = M - 1; b >= 0; b--) if (((i + 1) >> b) & 1) fs = b + 1;
          if (lc > fs) exp_cycles += lc - fs;
          for (int p = 0; p < lc; p++) ru[p][i] = hd[p];
          continue;
        end
        if (PLC && i != N - 1) r_miss++;
        exp_cycles += lc;
        for (int q = 0; q < nc; q++) begin
          for (int j = 0; j < N; j++) nu[q][j] = ru[cp[q]][j];
          nu[q][i] = cb[q];
          npm[q] = cm[q];
        end
        for (int q = 0; q < nc; q++) begin
          for (int j = 0; j < N; j++) ru[q][j] = nu[q][j];
          rpm[q] = npm[q];
        end
        lc = nc;
      end
    end
  endtask

  // ---------------- stimulus ----------------
  function automatic void make_frame(input int f);
    int k;
    bit uu [N];
    bit xx [N];
    int noise;
    // frozen set: frame 0 uses the upper half as information bits, others random
    for (int j = 0; j < N; j++) frozen[j] = (f == 0) ? (j < N / 2) : ($urandom_range(0, 1) == 1);
    if (f % 5 != 4) frozen[N-1] = 1'b0;
    k = 0;
    for (int j = 0; j < N; j++) begin
      uu[j] = frozen[j] ? 1'b0 : 1'($urandom_range(0, 1));
      xx[j] = uu[j];
    end
    for (int h = 1; h < N; h = h * 2)
      for (int j = 0; j < N; j++)
        if ((j & h) == 0) xx[j] = xx[j] ^ xx[j+h];
    for (int j = 0; j < N; j++) begin
      if (f % 2 == 1) begin
        chan_llr[j] = llr_t'($urandom_range(0, 255) - 128);
      end else begin
        noise = int'($urandom_range(0, 60)) - 30;
        chan_llr[j] = llr_t'(sat((xx[j] ? -24 : 24) + noise));
      end
      ch[j] = (chan_llr[j] < -LMAX) ? -LMAX : int'(chan_llr[j]);
    end
  endfunction

  always @(posedge clk) begin
    if (stall) n_stall++;
    if (sc_en) n_sc++;
    if (dup_use) n_dup++;
    if (spawn) n_spawn++;
    if (spec_hit) n_hit++;
  end

  initial begin
    for (int j = 0; j < N; j++) chan_llr[j] = '0;
    frozen = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      make_frame(f);
      ref_decode();
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (!done) begin
        if (busy) cyc++;
        @(negedge clk);
      end
      checks++;
      if (u_hat !== frozen_apply()) begin
        failures++;
        $display("frame %0d: decoded word mismatch", f);
      end
      checks++;
      if (int'(best_pm) != rpm[0]) begin
        failures++;
        $display("frame %0d: best metric %0d expected %0d", f, best_pm, rpm[0]);
      end
      checks++;
      if (cyc != exp_cycles) begin
        failures++;
        $display("frame %0d: %0d busy cycles, expected %0d", f, cyc, exp_cycles);
      end
    end
    checks += 5;
    if (n_stall == 0)  begin failures++; $display("no stall seen"); end
    if (n_sc == 0)     begin failures++; $display("no sort-and-copy seen"); end
    if (n_dup == 0)    begin failures++; $display("no duplicated PU use seen"); end
    if (n_spawn == 0)  begin failures++; $display("no path split seen"); end
    if (n_frozen == 0) begin failures++; $display("no frozen decision seen"); end
    if (PLC) begin
      checks += 3;
      if (n_hit != r_hit) begin failures++; $display("%0d compute-ahead hits, expected %0d", n_hit, r_hit); end
      if (r_hit == 0)     begin failures++; $display("no compute-ahead hit seen"); end
      if (r_miss == 0)    begin failures++; $display("no compute-ahead miss seen"); end
      $display("compute-ahead: hits=%0d misses=%0d", r_hit, r_miss);
    end
    $display("mechanisms: stall=%0d sort_copy=%0d dup_pu=%0d spawn=%0d frozen=%0d",
             n_stall, n_sc, n_dup, n_spawn, n_frozen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] frozen_apply();
    logic [N-1:0] v;
    for (int j = 0; j < N; j++) v[j] = ru[0][j];
    return v;
  endfunction
endmodule
