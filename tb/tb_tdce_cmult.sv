// tb_tdce_cmult: self-checking test of the complex multiplier.
// Random and corner operands (most negative values included) are applied at
// the widths used in the default filter; the result is compared with the
// complex product computed in 64-bit integer arithmetic.
module tb_tdce_cmult;
  localparam int AW = 21;
  localparam int BW = 14;
  localparam int PW = AW + BW + 1;

  logic signed [AW-1:0] a_re, a_im;
  logic signed [BW-1:0] b_re, b_im;
  logic signed [PW-1:0] p_re, p_im;

  int checks = 0, failures = 0;

  tdce_cmult #(.A_W(AW), .B_W(BW)) dut (.a_re, .a_im, .b_re, .b_im, .p_re, .p_im);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    longint er, ei;
    #1;
    er = longint'(a_re) * longint'(b_re) - longint'(a_im) * longint'(b_im);
    ei = longint'(a_re) * longint'(b_im) + longint'(a_im) * longint'(b_re);
    checks++;
    if (longint'(p_re) != er || longint'(p_im) != ei) begin
      failures++;
      if (failures < 10)
        $display("(%0d,%0d)*(%0d,%0d): got %0d,%0d expected %0d,%0d", a_re, a_im, b_re, b_im, p_re, p_im, er, ei);
    end
  endtask

  localparam logic signed [AW-1:0] AMIN = {1'b1, {(AW-1){1'b0}}};
  localparam logic signed [AW-1:0] AMAX = {1'b0, {(AW-1){1'b1}}};
  localparam logic signed [BW-1:0] BMIN = {1'b1, {(BW-1){1'b0}}};
  localparam logic signed [BW-1:0] BMAX = {1'b0, {(BW-1){1'b1}}};

  initial begin
    a_re = AMIN; a_im = AMIN; b_re = BMIN; b_im = BMAX; check_one();
    a_re = AMIN; a_im = AMAX; b_re = BMIN; b_im = BMIN; check_one();
    a_re = AMAX; a_im = AMIN; b_re = BMAX; b_im = BMIN; check_one();
    a_re = AMAX; a_im = AMAX; b_re = BMAX; b_im = BMAX; check_one();
    for (int t = 0; t < 5000; t++) begin
      a_re = AW'($urandom);
      a_im = AW'($urandom);
      b_re = BW'($urandom);
      b_im = BW'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
