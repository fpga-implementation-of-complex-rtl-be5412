// tdce_delay_line: the FIR delay line of the clustered filter.
//
// It keeps the last N_TAPS complex input samples. Each cycle with shift_en
// high moves every sample one place along (taps[k] -> taps[k+1]) and writes
// din into taps[0], so taps[0] is always the newest sample and
// taps[N_TAPS-1] the oldest. All positions are visible at once, because the
// cluster adders that follow read every tap in the same cycle.
//
// Timing: taps change on the clock edge at which shift_en is sampled high.
// Reset (synchronous, active low) clears the line to zero, which is this
// design's choice; the filter itself only fixes the line's length.
module tdce_delay_line
  import tdce_pkg::*;
#(
  parameter int N_TAPS = N_TAPS_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  shift_en,
  input  cplx_t din,
  output cplx_t taps [N_TAPS]
);

  cplx_t line_q [N_TAPS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_TAPS; k++) line_q[k] <= '0;
    end else if (shift_en) begin
      line_q[0] <= din;
      for (int k = 1; k < N_TAPS; k++) line_q[k] <= line_q[k-1];
    end
  end

  assign taps = line_q;

endmodule
