// olsc_pm_mem: the path metrics memory, one metric register per list path.
//
// init clears all metrics (start of a codeword: the single initial path has
// metric 0). A path that decides a frozen or spawning bit writes its own new
// metric (dec_*); a spawned path receives its metric through spawn_*; the
// sort-and-copy step (sc_*) writes every path with its survivor's metric.
// Priority: init, then sc, then spawn, then dec. Written at the clock edge.
module olsc_pm_mem
  import olsc_pkg::*;
#(
  parameter int unsigned L = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic             dec_en  [L],
  input  pm_t              dec_pm  [L],
  input  logic             spawn_en,
  input  logic [PTH_W-1:0] spawn_dst,
  input  pm_t              spawn_pm,
  input  logic             sc_en,
  input  pm_t              sc_pm   [L],
  output pm_t              pm      [L]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < L; p++) pm[p] <= '0;
    end else begin
      for (int unsigned p = 0; p < L; p++) begin
        if (init)                                         pm[p] <= '0;
        else if (sc_en)                                   pm[p] <= sc_pm[p];
        else if (spawn_en && spawn_dst == PTH_W'(p))      pm[p] <= spawn_pm;
        else if (dec_en[p])                               pm[p] <= dec_pm[p];
      end
    end
  end
endmodule
