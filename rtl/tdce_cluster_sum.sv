// tdce_cluster_sum: the per-cluster adders of the clustered filter.
//
// This is the first half of the factorised FIR: instead of multiplying every
// delay-line sample by its own tap, the samples whose taps fall into the same
// cluster are added first, so that each cluster needs a single complex
// multiplication afterwards. For every cluster c the block computes
//   sum[c] = sum over k with map[k] == c of taps[k]
// separately for the real and imaginary parts. Taps whose map entry is
// N_CLUST or more belong to no cluster and are left out.
//
// The sums are exact: they are SUM_W = 14 + ceil(log2(N_TAPS)) bits wide,
// enough for all N_TAPS samples to land in one cluster. The adders are
// combinational balanced trees, and their results are captured in registers
// on a clock edge at which load is high, so the multiply stage reads stable
// values while the delay line may move on. One adder per cluster follows the filter drawing;
// registering the sums is this design's choice.
module tdce_cluster_sum
  import tdce_pkg::*;
#(
  parameter int N_TAPS  = N_TAPS_DEF,
  parameter int N_CLUST = N_CLUST_DEF,
  parameter int MAP_W   = $clog2(N_CLUST + 1),
  parameter int SUM_W   = SAMPLE_W + $clog2(N_TAPS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  cplx_t                   taps   [N_TAPS],
  input  logic [MAP_W-1:0]        map    [N_TAPS],
  output logic signed [SUM_W-1:0] sum_re [N_CLUST],
  output logic signed [SUM_W-1:0] sum_im [N_CLUST]
);

  // Balanced adder tree per cluster. Level LEVELS holds the N_TAPS masked
  // samples (padded with zeros to a power of two); node i of level l adds
  // nodes 2i and 2i+1 of level l+1; level 0 is the cluster sum. The depth is
  // ceil(log2(N_TAPS)) adders instead of a chain of N_TAPS.
  localparam int LEVELS = (N_TAPS > 1) ? $clog2(N_TAPS) : 1;

  logic signed [SUM_W-1:0] acc_re [N_CLUST];
  logic signed [SUM_W-1:0] acc_im [N_CLUST];

  for (genvar c = 0; c < N_CLUST; c++) begin : g_clust
    for (genvar l = LEVELS; l >= 0; l--) begin : g_lvl
      logic signed [SUM_W-1:0] v_re [1 << l];
      logic signed [SUM_W-1:0] v_im [1 << l];
      for (genvar i = 0; i < (1 << l); i++) begin : g_node
        if (l == LEVELS) begin : g_leaf
          if (i < N_TAPS) begin : g_tap
            assign v_re[i] = (int'(map[i]) == c) ? SUM_W'(taps[i].re) : '0;
            assign v_im[i] = (int'(map[i]) == c) ? SUM_W'(taps[i].im) : '0;
          end else begin : g_pad
            assign v_re[i] = '0;
            assign v_im[i] = '0;
          end
        end else begin : g_add
          assign v_re[i] = g_lvl[l+1].v_re[2*i] + g_lvl[l+1].v_re[2*i+1];
          assign v_im[i] = g_lvl[l+1].v_im[2*i] + g_lvl[l+1].v_im[2*i+1];
        end
      end
    end
    assign acc_re[c] = g_lvl[0].v_re[0];
    assign acc_im[c] = g_lvl[0].v_im[0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CLUST; c++) begin
        sum_re[c] <= '0;
        sum_im[c] <= '0;
      end
    end else if (load) begin
      sum_re <= acc_re;
      sum_im <= acc_im;
    end
  end

endmodule
