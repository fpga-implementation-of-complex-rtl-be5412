// tdce_top: one time-domain clustered equalizer (TDCE) unit for chromatic
// dispersion compensation.
//
// The unit is a complex FIR filter whose N_TAPS taps have been replaced by
// N_CLUST cluster centroids. Input samples (2 per symbol) enter a delay line;
// the samples of the taps that share a cluster are added; each cluster sum is
// multiplied by its centroid; the products are added into one output sample
// (1 per symbol):
//   y = sum_c C[c] * ( sum_{k: map[k]=c} x[n-k] )
// The tap-to-cluster map and the centroids are found offline and written
// through the configuration port before data is sent; a map value of
// N_CLUST or more switches a tap off.
//
// Interface
//   in_valid/in_ready/in_data    input sample stream, valid/ready handshake
//   out_valid/out_ready/out_data output sample stream, valid/ready handshake;
//                                out_sat marks an output that was clamped
//   cfg_we/cfg_sel/cfg_addr/cfg_data  configuration writes: cfg_sel=CFG_MAP
//       writes map[cfg_addr] = cfg_data.re[MAP_W-1:0]; cfg_sel=CFG_CENT writes
//       centroid[cfg_addr] = cfg_data. Writes take effect on the next clock
//       edge and should be made while no data is flowing.
// Samples, centroids and outputs are complex 14-bit fixed point with 5
// integer bits, as on the FPGA. Reset is synchronous and active low.
//
// Timing: one output per DECIM + 1 + N_CLUST cycles with continuous input
// (13 cycles per 2 input samples by default, 0.154 samples per clock);
// out_valid rises N_CLUST + 3 = 13 cycles after the clock edge that took the
// second sample of its symbol.
// The clustering structure follows the filter drawing; the handshakes, the
// shared multiplier, the register placement and the configuration port are
// this design's own.
module tdce_top
  import tdce_pkg::*;
#(
  parameter int N_TAPS  = N_TAPS_DEF,
  parameter int N_CLUST = N_CLUST_DEF,
  parameter int DECIM   = DECIM_DEF,
  parameter int CFG_A_W = $clog2(N_TAPS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // input sample stream
  input  logic               in_valid,
  output logic               in_ready,
  input  cplx_t              in_data,
  // output sample stream
  output logic               out_valid,
  input  logic               out_ready,
  output cplx_t              out_data,
  output logic               out_sat,
  // configuration
  input  logic               cfg_we,
  input  cfg_sel_e           cfg_sel,
  input  logic [CFG_A_W-1:0] cfg_addr,
  input  cplx_t              cfg_data
);

  localparam int MAP_W = $clog2(N_CLUST + 1);
  localparam int SUM_W = SAMPLE_W + $clog2(N_TAPS);
  localparam int P_W   = SUM_W + SAMPLE_W + 1;

  // ---------------------------------------------------------------- control
  logic             shift_en, sum_load, mac_en, mac_first, out_load;
  logic [MAP_W-1:0] clust_idx;

  tdce_ctrl #(.N_CLUST(N_CLUST), .DECIM(DECIM), .IDX_W(MAP_W)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready,
    .shift_en, .sum_load, .mac_en, .mac_first, .clust_idx, .out_load,
    .out_valid, .out_ready
  );

  // ------------------------------------------------------------ delay line
  cplx_t taps [N_TAPS];

  tdce_delay_line #(.N_TAPS(N_TAPS)) u_line (
    .clk, .rst_n, .shift_en, .din(in_data), .taps
  );

  // ---------------------------------------------------- configuration tables
  logic [MAP_W-1:0] map [N_TAPS];
  cplx_t            cent;

  tdce_cluster_map #(.N_TAPS(N_TAPS), .N_CLUST(N_CLUST), .MAP_W(MAP_W),
                     .ADDR_W(CFG_A_W)) u_map (
    .clk, .rst_n,
    .we(cfg_we && (cfg_sel == CFG_MAP)), .waddr(cfg_addr),
    .wdata(cfg_data.re[MAP_W-1:0]), .map
  );

  tdce_centroid_mem #(.N_CLUST(N_CLUST), .ADDR_W(MAP_W)) u_cent (
    .clk, .rst_n,
    .we(cfg_we && (cfg_sel == CFG_CENT) && (int'(cfg_addr) < N_CLUST)),
    .waddr(MAP_W'(cfg_addr)), .wdata(cfg_data),
    .raddr(clust_idx), .rdata(cent)
  );

  // --------------------------------------------------------- cluster sums
  logic signed [SUM_W-1:0] sum_re [N_CLUST];
  logic signed [SUM_W-1:0] sum_im [N_CLUST];

  tdce_cluster_sum #(.N_TAPS(N_TAPS), .N_CLUST(N_CLUST), .MAP_W(MAP_W),
                     .SUM_W(SUM_W)) u_sum (
    .clk, .rst_n, .load(sum_load), .taps, .map, .sum_re, .sum_im
  );

  // ------------------------------------- shared centroid multiplier + sum
  logic signed [SUM_W-1:0] sel_re, sel_im;
  logic signed [P_W-1:0]   p_re, p_im;

  always_comb begin
    sel_re = '0;
    sel_im = '0;
    for (int c = 0; c < N_CLUST; c++) begin
      if (int'(clust_idx) == c) begin
        sel_re = sum_re[c];
        sel_im = sum_im[c];
      end
    end
  end

  tdce_cmult #(.A_W(SUM_W), .B_W(SAMPLE_W), .P_W(P_W)) u_mult (
    .a_re(sel_re), .a_im(sel_im), .b_re(cent.re), .b_im(cent.im),
    .p_re, .p_im
  );

  cplx_t y;
  logic  y_sat;

  tdce_output_sum #(.P_W(P_W), .N_CLUST(N_CLUST), .FRAC(SAMPLE_FRAC)) u_osum (
    .clk, .rst_n, .en(mac_en), .first(mac_first), .p_re, .p_im,
    .y, .sat(y_sat)
  );

  // -------------------------------------------------------- output register
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_data <= '0;
      out_sat  <= 1'b0;
    end else if (out_load) begin
      out_data <= y;
      out_sat  <= y_sat;
    end
  end

  // Output handshake: a pending output holds its value until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));

endmodule
