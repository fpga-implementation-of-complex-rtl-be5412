// tdce_output_sum: the final adder of the clustered filter and the output
// requantiser.
//
// The cluster products arrive one per cycle. On a cycle with en high the
// accumulator either restarts with the incoming product (first high) or adds
// it to what it holds; after the last cluster it holds the full filter
// output at full precision (2*FRAC fractional bits). The output y is the
// accumulator brought back to the 14-bit sample format: the extra FRAC
// fractional bits are dropped (rounding toward minus infinity, the default
// of fixed-point types in high-level synthesis) and the value is clamped to
// the sample range; sat flags that the clamp acted on either part.
// Truncation and saturation are this design's choices: only the 14-bit
// output word is the paper's.
//
// Timing: acc updates on the clock edge; y and sat follow acc
// combinationally.
module tdce_output_sum
  import tdce_pkg::*;
#(
  parameter int P_W     = 36,
  parameter int N_CLUST = N_CLUST_DEF,
  parameter int FRAC    = SAMPLE_FRAC,
  parameter int ACC_W   = P_W + $clog2(N_CLUST + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  first,
  input  logic signed [P_W-1:0] p_re,
  input  logic signed [P_W-1:0] p_im,
  output cplx_t                 y,
  output logic                  sat
);

  logic signed [ACC_W-1:0] acc_re, acc_im;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_re <= '0;
      acc_im <= '0;
    end else if (en) begin
      acc_re <= (first ? '0 : acc_re) + ACC_W'(p_re);
      acc_im <= (first ? '0 : acc_im) + ACC_W'(p_im);
    end
  end

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (SAMPLE_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(64'sd1 <<< (SAMPLE_W - 1));

  logic signed [ACC_W-1:0] sh_re, sh_im;
  logic                    sat_re, sat_im;

  always_comb begin
    sh_re  = acc_re >>> FRAC;
    sh_im  = acc_im >>> FRAC;
    sat_re = (sh_re > MAXV) || (sh_re < MINV);
    sat_im = (sh_im > MAXV) || (sh_im < MINV);
    y.re   = (sh_re > MAXV) ? sample_t'(MAXV) :
             (sh_re < MINV) ? sample_t'(MINV) : sample_t'(sh_re);
    y.im   = (sh_im > MAXV) ? sample_t'(MAXV) :
             (sh_im < MINV) ? sample_t'(MINV) : sample_t'(sh_im);
    sat    = sat_re || sat_im;
  end

endmodule
