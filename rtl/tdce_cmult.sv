// tdce_cmult: complex multiplier for one cluster.
//
// Multiplies a cluster sum a by its centroid tap b with four real
// multiplications, the count the complexity figures of the filter assume:
//   p_re = a_re*b_re - a_im*b_im
//   p_im = a_re*b_im + a_im*b_re
// The result is full precision (P_W = A_W + B_W + 1 bits), so nothing is
// lost before the output accumulator. Its binary point sits at the sum of the
// operands' fractional bit counts. The block is purely combinational; the
// accumulator that follows registers the result. The four-multiplication
// product is the method's own; keeping it at full precision and sharing one
// such multiplier among all clusters (see tdce_ctrl) are this design's
// choices.
module tdce_cmult #(
  parameter int A_W = 21,
  parameter int B_W = 14,
  parameter int P_W = A_W + B_W + 1
) (
  input  logic signed [A_W-1:0] a_re,
  input  logic signed [A_W-1:0] a_im,
  input  logic signed [B_W-1:0] b_re,
  input  logic signed [B_W-1:0] b_im,
  output logic signed [P_W-1:0] p_re,
  output logic signed [P_W-1:0] p_im
);

  logic signed [A_W+B_W-1:0] rr, ii, ri, ir;

  always_comb begin
    rr   = a_re * b_re;
    ii   = a_im * b_im;
    ri   = a_re * b_im;
    ir   = a_im * b_re;
    p_re = P_W'(rr) - P_W'(ii);
    p_im = P_W'(ri) + P_W'(ir);
  end

endmodule
