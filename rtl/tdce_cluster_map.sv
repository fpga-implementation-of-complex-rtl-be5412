// tdce_cluster_map: the tap-to-cluster table of the clustered filter.
//
// Entry k holds the index of the cluster (centroid) that filter tap k was
// assigned to when the taps were clustered offline. Index values
// 0..N_CLUST-1 name a cluster; any larger value marks the tap as unused, so a
// filter shorter than N_TAPS can run on the same hardware with its surplus
// taps switched off. All entries are read in parallel by the cluster adders.
//
// Interface: one write port (we, waddr, wdata), written on the clock edge.
// Writes to an address >= N_TAPS are ignored. Reset (synchronous, active
// low) marks every tap unused, so an unconfigured filter outputs zeros.
// The unused-tap code and the reset value are this design's choices.
module tdce_cluster_map
  import tdce_pkg::*;
#(
  parameter int N_TAPS  = N_TAPS_DEF,
  parameter int N_CLUST = N_CLUST_DEF,
  parameter int MAP_W   = $clog2(N_CLUST + 1),
  parameter int ADDR_W  = $clog2(N_TAPS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [MAP_W-1:0]  wdata,
  output logic [MAP_W-1:0]  map [N_TAPS]
);

  logic [MAP_W-1:0] map_q [N_TAPS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_TAPS; k++) map_q[k] <= MAP_W'(N_CLUST);
    end else if (we && (int'(waddr) < N_TAPS)) begin
      map_q[waddr] <= wdata;
    end
  end

  assign map = map_q;

endmodule
