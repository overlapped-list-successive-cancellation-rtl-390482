// tb_olsc_survivor_mem: random decision / spawn / sort-and-copy operations on
// the survival path memory against a model kept here; checks all paths and
// the u_best output (path 0) every cycle.
module tb_olsc_survivor_mem;
  import olsc_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned L = 4;
  logic clk = 0, rst_n = 0, init = 0, spawn_en = 0, sc_en = 0, spawn_bit = 0;
  logic dec_en [L], dec_bit [L], sc_bit [L];
  logic [IDX_W-1:0] dec_idx [L];
  logic [PTH_W-1:0] spawn_src, spawn_dst, sc_parent [L];
  logic [IDX_W-1:0] spawn_idx, sc_idx;
  logic [N-1:0] u [L], u_best;
  logic [N-1:0] model [L], nm [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  olsc_survivor_mem #(.N(N), .L(L)) dut (.clk, .rst_n, .init, .dec_en, .dec_idx, .dec_bit,
    .spawn_en, .spawn_src, .spawn_dst, .spawn_idx, .spawn_bit, .sc_en, .sc_parent, .sc_bit,
    .sc_idx, .u, .u_best);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < L; p++) begin
      dec_en[p] = 0; dec_bit[p] = 0; sc_bit[p] = 0; dec_idx[p] = 0; sc_parent[p] = 0; model[p] = '0;
    end
    spawn_src = 0; spawn_dst = 0; spawn_idx = 0; sc_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      init = ($urandom_range(0, 40) == 0);
      sc_en = ($urandom_range(0, 6) == 0);
      spawn_en = ($urandom_range(0, 3) == 0);
      spawn_src = PTH_W'($urandom_range(0, L - 1));
      spawn_dst = PTH_W'($urandom_range(0, L - 1));
      spawn_idx = IDX_W'($urandom_range(0, N - 1));
      spawn_bit = 1'($urandom_range(0, 1));
      sc_idx = IDX_W'($urandom_range(0, N - 1));
      for (int p = 0; p < L; p++) begin
        dec_en[p] = 1'($urandom_range(0, 1));
        dec_bit[p] = 1'($urandom_range(0, 1));
        dec_idx[p] = IDX_W'($urandom_range(0, N - 1));
        sc_parent[p] = PTH_W'($urandom_range(0, L - 1));
        sc_bit[p] = 1'($urandom_range(0, 1));
      end
      for (int p = 0; p < L; p++) begin
        nm[p] = model[p];
        if (init) nm[p] = '0;
        else if (sc_en) begin nm[p] = model[sc_parent[p]]; nm[p][sc_idx] = sc_bit[p]; end
        else if (spawn_en && spawn_dst == PTH_W'(p)) begin nm[p] = model[spawn_src]; nm[p][spawn_idx] = spawn_bit; end
        else if (dec_en[p]) nm[p][dec_idx[p]] = dec_bit[p];
      end
      model = nm;
      @(negedge clk);
      for (int p = 0; p < L; p++) begin
        checks++;
        if (u[p] !== model[p]) failures++;
      end
      checks++;
      if (u_best !== model[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
