// tb_olsc_psum_gen: decides the N bits of random words one by one through the
// partial-sum generator and, before every bit i, checks each stage register
// that a g step of bit i may read (stage s with bit s-1 of i set) against the
// direct encoding u[a .. a+2^(s-1)-1] F^(kron) of the left sibling subtree.
module tb_olsc_psum_gen;
  import olsc_pkg::*;
  localparam int unsigned N = 32;
  localparam int unsigned M = 5;
  logic [N-2:0] ps_in, ps_out;
  logic [IDX_W-1:0] idx;
  logic bit_val;
  int checks = 0, failures = 0;

  olsc_psum_gen #(.N(N)) dut (.ps_in, .idx, .bit_val, .ps_out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit u [N];
    bit x [N];
    int half, a;
    for (int w = 0; w < 40; w++) begin
      ps_in = '0;
      for (int i = 0; i < N; i++) begin
        for (int s = 1; s <= M; s++) begin
          if ((i >> (s - 1)) & 1) begin
            half = 1 << (s - 1);
            a = (i >> s) << s;
            for (int j = 0; j < half; j++) x[j] = u[a+j];
            for (int h = 1; h < half; h = h * 2)
              for (int j = 0; j < half; j++)
                if ((j & h) == 0) x[j] = x[j] ^ x[j+h];
            for (int j = 0; j < half; j++) begin
              checks++;
              if (ps_in[half - 1 + j] != x[j]) failures++;
            end
          end
        end
        u[i] = 1'($urandom_range(0, 1));
        idx = IDX_W'(i);
        bit_val = u[i];
        #1;
        ps_in = ps_out;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
