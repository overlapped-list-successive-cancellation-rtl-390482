// tb_olsc_pu: checks the PU against integer f (min-sum) and saturated g
// computed here, on corner values and random operands.
module tb_olsc_pu;
  import olsc_pkg::*;
  llr_t a, b, y;
  logic ps, is_g;
  int checks = 0, failures = 0;

  olsc_pu dut (.a, .b, .ps, .is_g, .y);

  function automatic int expect_y(int ia, int ib, bit ips, bit ig);
    int r, ma, mb;
    if (ig) begin
      r = ips ? ib - ia : ib + ia;
      if (r > 127) r = 127;
      if (r < -127) r = -127;
    end else begin
      ma = ia < 0 ? -ia : ia;
      mb = ib < 0 ? -ib : ib;
      r = ma < mb ? ma : mb;
      if ((ia < 0) ^ (ib < 0)) r = -r;
    end
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      if (t < 16) begin
        a = (t & 1) ? 8'sd127 : -8'sd127;
        b = (t & 2) ? 8'sd100 : -8'sd90;
      end else begin
        a = llr_t'($urandom_range(0, 254) - 127);
        b = llr_t'($urandom_range(0, 254) - 127);
      end
      ps   = 1'($urandom_range(0, 1));
      is_g = (t < 16) ? 1'(t >> 2) : 1'($urandom_range(0, 1));
      #1;
      checks++;
      if (int'(y) != expect_y(int'(a), int'(b), ps, is_g)) begin
        failures++;
        if (failures < 10) $display("a=%0d b=%0d ps=%0d g=%0d y=%0d", a, b, ps, is_g, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
