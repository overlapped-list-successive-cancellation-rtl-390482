// tb_olsc_pm_mem: random init / decision / spawn / sort-and-copy writes to the
// path metrics memory against a model kept here, with the documented priority.
module tb_olsc_pm_mem;
  import olsc_pkg::*;
  localparam int unsigned L = 4;
  logic clk = 0, rst_n = 0, init = 0, spawn_en = 0, sc_en = 0;
  logic dec_en [L];
  pm_t dec_pm [L], sc_pm [L], pm [L];
  logic [PTH_W-1:0] spawn_dst;
  pm_t spawn_pm;
  int model [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  olsc_pm_mem #(.L(L)) dut (.clk, .rst_n, .init, .dec_en, .dec_pm, .spawn_en, .spawn_dst,
                            .spawn_pm, .sc_en, .sc_pm, .pm);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < L; p++) begin dec_en[p] = 0; dec_pm[p] = 0; sc_pm[p] = 0; model[p] = 0; end
    spawn_dst = 0; spawn_pm = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      init = ($urandom_range(0, 30) == 0);
      sc_en = ($urandom_range(0, 6) == 0);
      spawn_en = ($urandom_range(0, 3) == 0);
      spawn_dst = PTH_W'($urandom_range(0, L - 1));
      spawn_pm = pm_t'($urandom);
      for (int p = 0; p < L; p++) begin
        dec_en[p] = 1'($urandom_range(0, 1));
        dec_pm[p] = pm_t'($urandom);
        sc_pm[p] = pm_t'($urandom);
      end
      for (int p = 0; p < L; p++) begin
        if (init) model[p] = 0;
        else if (sc_en) model[p] = int'(sc_pm[p]);
        else if (spawn_en && int'(spawn_dst) == p) model[p] = int'(spawn_pm);
        else if (dec_en[p]) model[p] = int'(dec_pm[p]);
      end
      @(negedge clk);
      for (int p = 0; p < L; p++) begin
        checks++;
        if (int'(pm[p]) != model[p]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
