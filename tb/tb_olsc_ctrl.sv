// tb_olsc_ctrl: checks the path-overlapped schedule against the paper's two
// drawn examples, an (8,4) code with information bits 3, 5, 6, 7 at list
// sizes 2 and 4. For every busy cycle it compares the stage each path
// activates (0 = idle) and the sort-and-copy cycles with the tables below,
// transcribed from those schedules, and checks the busy cycle counts 20 and 22.
module tb_olsc_ctrl;
  import olsc_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0, start2 = 0, start4 = 0;
  logic [N-1:0] frozen = 8'b0001_0111;   // bits 0,1,2,4 frozen
  step_t st2 [2];
  step_t st4 [4];
  logic sc2, sc4, stall2, stall4, busy2, busy4, done2, done4;
  logic [PTH_W-1:0] lc2, lc4;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  olsc_ctrl #(.N(N), .L(2)) dut2 (.clk, .rst_n, .start(start2), .frozen, .sort_count(PTH_W'(2)), .spec_ok(1'b0), .spec_hit(),
    .step(st2), .sc_en(sc2), .stall(stall2), .busy(busy2), .done(done2), .lcur(lc2));
  olsc_ctrl #(.N(N), .L(4)) dut4 (.clk, .rst_n, .start(start4), .frozen, .sort_count(PTH_W'(4)), .spec_ok(1'b0), .spec_hit(),
    .step(st4), .sc_en(sc4), .stall(stall4), .busy(busy4), .done(done4), .lcur(lc4));

  // stage per path and cycle; 9 marks a sort (and copy) cycle
  int exp2 [2][20] = '{
    '{3,2,1,1,2,1,1,3,2,1,1,0,9,2,1,0,9,1,0,9},
    '{0,0,0,0,0,0,0,0,3,2,1,1,9,0,2,1,9,0,1,9}};
  int exp4 [4][22] = '{
    '{3,2,1,1,2,1,1,3,2,1,1,2,1,0,0,0,9,1,0,0,0,9},
    '{0,0,0,0,0,0,0,0,3,2,1,1,2,1,0,0,9,0,1,0,0,9},
    '{0,0,0,0,0,0,0,0,0,0,0,0,0,2,1,0,9,0,0,1,0,9},
    '{0,0,0,0,0,0,0,0,0,0,0,0,0,0,2,1,9,0,0,0,1,9}};

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, got;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      start2 = 1; start4 = 1;
      @(negedge clk);
      start2 = 0; start4 = 0;
      cyc = 0;
      while (busy2 || busy4) begin
        for (int p = 0; p < 2; p++) if (cyc < 20) begin
          got = sc2 ? 9 : (st2[p].valid ? int'(st2[p].stage) : 0);
          checks++;
          if (got != exp2[p][cyc]) begin
            failures++;
            $display("L=2 cycle %0d path %0d: %0d expected %0d", cyc + 1, p + 1, got, exp2[p][cyc]);
          end
        end
        for (int p = 0; p < 4; p++) if (cyc < 22) begin
          got = sc4 ? 9 : (st4[p].valid ? int'(st4[p].stage) : 0);
          checks++;
          if (got != exp4[p][cyc]) begin
            failures++;
            $display("L=4 cycle %0d path %0d: %0d expected %0d", cyc + 1, p + 1, got, exp4[p][cyc]);
          end
        end
        checks++;
        if (busy2 != (cyc < 20) || busy4 != (cyc < 22)) begin
          failures++;
          $display("cycle %0d: busy %0d/%0d", cyc + 1, busy2, busy4);
        end
        cyc++;
        @(negedge clk);
      end
      checks++;
      if (cyc != 22) failures++;
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
