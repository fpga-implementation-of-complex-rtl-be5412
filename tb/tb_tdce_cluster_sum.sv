// tb_tdce_cluster_sum: self-checking test of the per-cluster adders.
// Random delay-line contents and random tap-to-cluster maps (unused taps
// included) are applied; after a load the registered sums are compared with
// sums the testbench forms tap by tap. Cycles with load low must keep the
// previous sums, and an all-in-one-cluster case of full-scale samples checks
// that the sum width cannot overflow.
module tb_tdce_cluster_sum;
  import tdce_pkg::*;

  localparam int N  = 93;
  localparam int NC = 10;
  localparam int MW = $clog2(NC + 1);
  localparam int SW = SAMPLE_W + $clog2(N);

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 load = 1'b0;
  cplx_t                taps [N];
  logic [MW-1:0]        map [N];
  logic signed [SW-1:0] sum_re [NC];
  logic signed [SW-1:0] sum_im [NC];

  int checks = 0, failures = 0;
  longint exp_re [NC];
  longint exp_im [NC];

  tdce_cluster_sum #(.N_TAPS(N), .N_CLUST(NC)) dut (.clk, .rst_n, .load, .taps, .map, .sum_re, .sum_im);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model();
    for (int c = 0; c < NC; c++) begin
      exp_re[c] = 0;
      exp_im[c] = 0;
    end
    for (int k = 0; k < N; k++) begin
      if (int'(map[k]) < NC) begin
        exp_re[map[k]] += longint'(taps[k].re);
        exp_im[map[k]] += longint'(taps[k].im);
      end
    end
  endtask

  task automatic compare();
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (longint'(sum_re[c]) != exp_re[c] || longint'(sum_im[c]) != exp_im[c]) begin
        failures++;
        if (failures < 10)
          $display("cluster %0d: got %0d,%0d expected %0d,%0d", c, sum_re[c], sum_im[c], exp_re[c], exp_im[c]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) begin
      taps[k] = '0;
      map[k]  = '0;
    end
    for (int c = 0; c < NC; c++) begin
      exp_re[c] = 0;
      exp_im[c] = 0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    compare();
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        taps[k].re = sample_t'($urandom);
        taps[k].im = sample_t'($urandom);
        map[k]     = MW'($urandom_range(0, NC));  // NC = unused tap
      end
      load = (t % 3 != 2);
      if (load) model();
      @(posedge clk);
      #1 compare();
    end
    // extreme case: all taps in one cluster at full scale
    for (int v = 0; v < 2; v++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        taps[k].re = v ? sample_t'(-(1 << (SAMPLE_W - 1))) : sample_t'((1 << (SAMPLE_W - 1)) - 1);
        taps[k].im = v ? sample_t'((1 << (SAMPLE_W - 1)) - 1) : sample_t'(-(1 << (SAMPLE_W - 1)));
        map[k]     = MW'(3);
      end
      load = 1'b1;
      model();
      @(posedge clk);
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
