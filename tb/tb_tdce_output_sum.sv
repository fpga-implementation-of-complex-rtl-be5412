// tb_tdce_output_sum: self-checking test of the output accumulator and
// requantiser. Sequences of N_CLUST random products (small ones, and large
// ones that force clamping) are accumulated with first on the initial one;
// the 14-bit output and the saturation flag are compared with a model that
// adds in 64-bit integers, shifts right by 9 with rounding toward minus
// infinity and clamps to [-8192, 8191]. Cycles with en low must hold.
module tb_tdce_output_sum;
  import tdce_pkg::*;

  localparam int PW = 36;
  localparam int NC = 10;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 en = 1'b0;
  logic                 first = 1'b0;
  logic signed [PW-1:0] p_re = '0, p_im = '0;
  cplx_t                y;
  logic                 sat;

  int checks = 0, failures = 0;
  int n_sat = 0;

  tdce_output_sum #(.P_W(PW), .N_CLUST(NC)) dut (.clk, .rst_n, .en, .first, .p_re, .p_im, .y, .sat);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint quant(longint v, output bit s);
    longint q = v >>> SAMPLE_FRAC;
    s = 1'b0;
    if (q > 8191)  begin q = 8191;  s = 1'b1; end
    if (q < -8192) begin q = -8192; s = 1'b1; end
    return q;
  endfunction

  initial begin
    longint acc_re, acc_im, er, ei;
    bit     sr, si;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      int scale;
      scale = (t % 4 == 3) ? 34 : 18;  // every fourth sequence saturates often
      acc_re = 0;
      acc_im = 0;
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        en    = 1'b1;
        first = (c == 0);
        p_re  = PW'($signed({$urandom, $urandom}) >>> (64 - scale));
        p_im  = PW'($signed({$urandom, $urandom}) >>> (64 - scale));
        acc_re += longint'(p_re);
        acc_im += longint'(p_im);
        // a stalled cycle in the middle must change nothing
        if (c == 4) begin
          @(negedge clk);
          en = 1'b0;
          p_re = '1;
        end
      end
      @(negedge clk);
      en = 1'b0;
      er = quant(acc_re, sr);
      ei = quant(acc_im, si);
      checks++;
      if (longint'(y.re) != er || longint'(y.im) != ei || sat != (sr | si)) begin
        failures++;
        if (failures < 10)
          $display("seq %0d: got %0d,%0d sat %0b expected %0d,%0d sat %0b", t, y.re, y.im, sat, er, ei, sr | si);
      end
      if (sr | si) n_sat++;
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
