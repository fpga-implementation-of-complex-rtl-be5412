// tdce_ctrl: sequencer of one clustered-filter unit.
//
// The filter takes DECIM input samples (2 samples per symbol) for every
// output sample (one per symbol). The controller runs one output period as
//   LOAD  accept DECIM samples, one per cycle at most (in_ready high), each
//         shifting the delay line;
//   SUM   capture the per-cluster sums of the new delay-line contents;
//   MAC   walk the clusters c = 0..N_CLUST-1, one per cycle, multiplying
//         sum[c] by centroid c and accumulating (mac_first on c = 0).
// With a continuous input stream and a ready sink one period lasts
// DECIM + 1 + N_CLUST cycles: 13 cycles for 2 input samples in the default
// configuration, 0.154 input samples per clock, which lies inside the
// 0.164 +- 0.012 samples per clock at which the FPGA filter was built.
// Sharing one complex multiplier among the clusters is this design's way of
// reaching that rate; the sequence itself is not given in detail.
//
// Output: the finished accumulator is copied into the output register one
// cycle after the last MAC cycle (out_load), while the next LOAD phase runs.
// out_valid then stays high until out_ready is seen (valid/ready
// handshake). If the previous result is still waiting, the controller holds
// in SUM before it overwrites the accumulator, so no output is lost.
// Reset is synchronous and active low.
module tdce_ctrl #(
  parameter int N_CLUST = 10,
  parameter int DECIM   = 2,
  parameter int IDX_W   = $clog2(N_CLUST + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // input stream handshake
  input  logic             in_valid,
  output logic             in_ready,
  // datapath control
  output logic             shift_en,
  output logic             sum_load,
  output logic             mac_en,
  output logic             mac_first,
  output logic [IDX_W-1:0] clust_idx,
  output logic             out_load,
  // output stream handshake
  output logic             out_valid,
  input  logic             out_ready
);

  typedef enum logic [1:0] {
    S_LOAD = 2'd0,
    S_SUM  = 2'd1,
    S_MAC  = 2'd2
  } state_e;

  localparam int CNT_W = (DECIM > 1) ? $clog2(DECIM) : 1;

  state_e           state_q;
  logic [CNT_W-1:0] cnt_q;
  logic [IDX_W-1:0] idx_q;
  logic             pend_q;   // accumulator holds a finished result
  logic             valid_q;

  always_comb begin
    in_ready  = (state_q == S_LOAD);
    shift_en  = in_ready && in_valid;
    sum_load  = (state_q == S_SUM) && !pend_q;
    mac_en    = (state_q == S_MAC);
    mac_first = mac_en && (idx_q == '0);
    clust_idx = idx_q;
    out_load  = pend_q && (!valid_q || out_ready);
  end

  assign out_valid = valid_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_LOAD;
      cnt_q   <= '0;
      idx_q   <= '0;
      pend_q  <= 1'b0;
      valid_q <= 1'b0;
    end else begin
      case (state_q)
        S_LOAD: begin
          if (shift_en) begin
            if (int'(cnt_q) == DECIM - 1) begin
              cnt_q   <= '0;
              state_q <= S_SUM;
            end else begin
              cnt_q <= cnt_q + 1'b1;
            end
          end
        end
        S_SUM: begin
          if (sum_load) begin
            idx_q   <= '0;
            state_q <= S_MAC;
          end
        end
        S_MAC: begin
          if (int'(idx_q) == N_CLUST - 1) begin
            idx_q   <= '0;
            state_q <= S_LOAD;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        default: state_q <= S_LOAD;
      endcase

      // Result hand-off: set when the last cluster has been accumulated,
      // cleared when the output register takes the result.
      if (mac_en && (int'(idx_q) == N_CLUST - 1)) pend_q <= 1'b1;
      else if (out_load)                          pend_q <= 1'b0;

      if (out_load)       valid_q <= 1'b1;
      else if (out_ready) valid_q <= 1'b0;
    end
  end

  // A result must never be overwritten before it was handed off.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (mac_en && mac_first) |-> !pend_q);

endmodule
