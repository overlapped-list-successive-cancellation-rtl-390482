// olsc_survivor_mem: the survival path memory, the decided bits u_0..u_{N-1}
// of each list path.
//
// dec_*: a path records its own decision of bit dec_idx[p]. spawn_*: path
// spawn_dst becomes a copy of path spawn_src with bit spawn_idx set to
// spawn_bit. sc_*: in the sort-and-copy step path p becomes a copy of path
// sc_parent[p] with bit sc_idx set to sc_bit[p]. Priority: init, sc, spawn,
// dec. After the final sort-and-copy, path 0 holds the most likely survivor,
// which is the decoder output `u_best`. Written at the clock edge.
module olsc_survivor_mem
  import olsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic             dec_en   [L],
  input  logic [IDX_W-1:0] dec_idx  [L],
  input  logic             dec_bit  [L],
  input  logic             spawn_en,
  input  logic [PTH_W-1:0] spawn_src,
  input  logic [PTH_W-1:0] spawn_dst,
  input  logic [IDX_W-1:0] spawn_idx,
  input  logic             spawn_bit,
  input  logic             sc_en,
  input  logic [PTH_W-1:0] sc_parent[L],
  input  logic             sc_bit   [L],
  input  logic [IDX_W-1:0] sc_idx,
  output logic [N-1:0]     u        [L],
  output logic [N-1:0]     u_best
);
  assign u_best = u[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < L; p++) u[p] <= '0;
    end else begin
      for (int unsigned p = 0; p < L; p++) begin
        if (init) begin
          u[p] <= '0;
        end else if (sc_en) begin
          u[p]                  <= u[sc_parent[p] % L];
          u[p][sc_idx % N]      <= sc_bit[p];
        end else if (spawn_en && spawn_dst == PTH_W'(p)) begin
          u[p]                  <= u[spawn_src % L];
          u[p][spawn_idx % N]   <= spawn_bit;
        end else if (dec_en[p]) begin
          u[p][dec_idx[p] % N]  <= dec_bit[p];
        end
      end
    end
  end
endmodule
