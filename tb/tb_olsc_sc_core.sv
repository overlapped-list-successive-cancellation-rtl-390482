// tb_olsc_sc_core: drives random step words for L = 4 paths of an N = 32
// decoder over random inner LLRs, channel LLRs and partial sums, and checks
// every path's stage output (buffer write or bit LLR) against f/g computed
// here from that path's own data. Also checks that paths sharing a stage get
// distinct duplicated copies (on_dup) and that a stage asked for by more paths
// than it has copies raises overflow.
module tb_olsc_sc_core;
  import olsc_pkg::*;
  localparam int unsigned N = 32;
  localparam int unsigned L = 4;
  localparam int unsigned M = 5;
  step_t step [L];
  llr_t chan [N];
  llr_t bufs [L][N-2];
  logic [N-2:0] ps [L];
  logic wr_en [L], bit_valid [L];
  logic [STG_W-1:0] wr_stage [L];
  llr_t wr_data [L][N/2];
  llr_t bit_llr [L];
  logic [L-1:0] on_dup;
  logic overflow;
  int checks = 0, failures = 0, n_dup = 0, n_ovf = 0;

  olsc_sc_core #(.N(N), .L(L)) dut (.step, .chan, .bufs, .ps, .wr_en, .wr_stage, .wr_data,
    .bit_valid, .bit_llr, .on_dup, .overflow);

  function automatic int rf(int a, int b);
    int ma = a < 0 ? -a : a, mb = b < 0 ? -b : b, m;
    m = ma < mb ? ma : mb;
    return ((a < 0) ^ (b < 0)) ? -m : m;
  endfunction
  function automatic int rg(int a, int b, bit u);
    int r = u ? b - a : b + a;
    return r > 127 ? 127 : (r < -127 ? -127 : r);
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, half, a, b, e, cnt [M+1];
    bit ovf;
    for (int t = 0; t < 3000; t++) begin
      for (int j = 0; j < N; j++) chan[j] = llr_t'($urandom_range(0, 254) - 127);
      for (int p = 0; p < L; p++) begin
        for (int j = 0; j < N-2; j++) bufs[p][j] = llr_t'($urandom_range(0, 254) - 127);
        ps[p] = (N-1)'({$urandom, $urandom});
        step[p] = '0;
        step[p].valid = 1'($urandom_range(0, 3) != 0);
        step[p].stage = STG_W'((t % 3 == 0) ? $urandom_range(1, 2) : $urandom_range(1, M));
        step[p].is_g  = 1'($urandom_range(0, 1));
      end
      #1;
      ovf = 0;
      for (int k = 0; k <= M; k++) cnt[k] = 0;
      for (int p = 0; p < L; p++) if (step[p].valid) cnt[step[p].stage]++;
      for (int k = 1; k <= M; k++) if (cnt[k] > stage_copies(L, k)) ovf = 1;
      checks++;
      if (overflow != ovf) failures++;
      if (ovf) begin n_ovf++; continue; end
      for (int p = 0; p < L; p++) begin
        if (!step[p].valid) begin
          checks++;
          if (wr_en[p] || bit_valid[p]) failures++;
          continue;
        end
        if (on_dup[p]) n_dup++;
        s = step[p].stage;
        half = 1 << (s - 1);
        for (int j = 0; j < half; j++) begin
          if (s == M) begin a = chan[j]; b = chan[j+half]; end
          else begin a = bufs[p][2*half - 2 + j]; b = bufs[p][2*half - 2 + j + half]; end
          e = step[p].is_g ? rg(a, b, ps[p][half - 1 + j]) : rf(a, b);
          checks++;
          if (s == 1) begin
            if (!bit_valid[p] || int'(bit_llr[p]) != e) failures++;
          end else begin
            if (!wr_en[p] || int'(wr_stage[p]) != s || int'(wr_data[p][j]) != e) failures++;
          end
        end
      end
    end
    checks++;
    if (n_dup == 0 || n_ovf == 0) failures++;
    $display("dup=%0d overflow=%0d", n_dup, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
