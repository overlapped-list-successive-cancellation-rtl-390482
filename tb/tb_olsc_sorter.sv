// tb_olsc_sorter: pushes the candidates of L paths one path per cycle, as the
// overlapped decoder does, and compares the kept list with a stable sort of
// all candidates done here. Includes ties, invalid second candidates
// (frozen bits) and fewer paths than L.
module tb_olsc_sorter;
  import olsc_pkg::*;
  localparam int unsigned L = 4;
  logic clk = 0, rst_n = 0, clear = 0, push = 0;
  cand_t cand_a, cand_b;
  cand_t list [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  olsc_sorter #(.L(L)) dut (.clk, .rst_n, .clear, .push, .cand_a, .cand_b, .list);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cm [2*L];
    int cp [2*L];
    bit cb [2*L];
    int nc, np, t, q;
    bit fz;
    cand_a = '0; cand_b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 300; round++) begin
      @(negedge clk);
      clear = 1; push = 0;
      @(negedge clk);
      clear = 0;
      np = (round % 3 == 0) ? $urandom_range(1, L) : L;
      fz = (round % 5 == 0);
      nc = 0;
      for (int p = 0; p < np; p++) begin
        push = 1;
        cand_a.valid = 1; cand_a.metric = pm_t'($urandom_range(0, 12)); cand_a.parent = PTH_W'(p); cand_a.bit_val = 0;
        cand_b.valid = !fz; cand_b.metric = pm_t'($urandom_range(0, 12)); cand_b.parent = PTH_W'(p); cand_b.bit_val = 1;
        cm[nc] = cand_a.metric; cp[nc] = p; cb[nc] = 0; nc++;
        if (!fz) begin cm[nc] = cand_b.metric; cp[nc] = p; cb[nc] = 1; nc++; end
        @(negedge clk);
      end
      push = 0;
      // stable sort
      for (int i = 1; i < nc; i++)
        for (int r = i; r > 0 && cm[r-1] > cm[r]; r--) begin
          t = cm[r]; cm[r] = cm[r-1]; cm[r-1] = t;
          t = cp[r]; cp[r] = cp[r-1]; cp[r-1] = t;
          q = cb[r]; cb[r] = cb[r-1]; cb[r-1] = 1'(q);
        end
      for (int k = 0; k < L; k++) begin
        checks++;
        if (k < nc) begin
          if (!list[k].valid || int'(list[k].metric) != cm[k] || int'(list[k].parent) != cp[k] || list[k].bit_val != cb[k]) begin
            failures++;
            if (failures < 10) $display("round %0d slot %0d: got %0d/%0d/%0d exp %0d/%0d/%0d", round, k,
              list[k].metric, list[k].parent, list[k].bit_val, cm[k], cp[k], cb[k]);
          end
        end else if (list[k].valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
