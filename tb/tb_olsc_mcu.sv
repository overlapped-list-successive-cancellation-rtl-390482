// tb_olsc_mcu: checks the candidate metrics of the MCU lane: the extension
// that agrees with sign(lam) keeps the metric, the other adds |lam|, with
// saturation at the metric maximum.
module tb_olsc_mcu;
  import olsc_pkg::*;
  llr_t lam;
  pm_t pm, pm0, pm1;
  logic hard;
  int checks = 0, failures = 0;
  int e0, e1, m;

  olsc_mcu dut (.lam, .pm, .pm0, .pm1, .hard);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      lam = llr_t'($urandom_range(0, 254) - 127);
      pm  = (t % 7 == 0) ? pm_t'(65535 - $urandom_range(0, 100)) : pm_t'($urandom_range(0, 5000));
      #1;
      m  = int'(lam) < 0 ? -int'(lam) : int'(lam);
      e0 = int'(lam) < 0 ? int'(pm) + m : int'(pm);
      e1 = int'(lam) < 0 ? int'(pm) : int'(pm) + m;
      if (e0 > 65535) e0 = 65535;
      if (e1 > 65535) e1 = 65535;
      checks += 3;
      if (int'(pm0) != e0) failures++;
      if (int'(pm1) != e1) failures++;
      if (hard != (int'(lam) < 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
