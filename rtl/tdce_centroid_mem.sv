// tdce_centroid_mem: the table of cluster centroids.
//
// Each of the N_CLUST entries is one complex filter tap, the centroid that
// stands in for every original tap of its cluster. The multiply-accumulate
// stage walks through the clusters one per cycle and reads the entry named
// by raddr; the read is combinational from the register array.
//
// Interface: one write port (we, waddr, wdata), written on the clock edge;
// writes to an address >= N_CLUST are ignored and reads of such an address
// return zero. Reset (synchronous, active low) clears all centroids. Those
// details are this design's choices.
module tdce_centroid_mem
  import tdce_pkg::*;
#(
  parameter int N_CLUST = N_CLUST_DEF,
  parameter int ADDR_W  = $clog2(N_CLUST + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  cplx_t             wdata,
  input  logic [ADDR_W-1:0] raddr,
  output cplx_t             rdata
);

  cplx_t mem_q [N_CLUST];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CLUST; c++) mem_q[c] <= '0;
    end else if (we && (int'(waddr) < N_CLUST)) begin
      mem_q[waddr] <= wdata;
    end
  end

  always_comb begin
    rdata = '0;
    if (int'(raddr) < N_CLUST) rdata = mem_q[raddr];
  end

endmodule
