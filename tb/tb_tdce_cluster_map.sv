// tb_tdce_cluster_map: self-checking test of the tap-to-cluster table.
// Checks the reset value (every tap unused, code N_CLUST), random writes
// against a model table, that writes with we low change nothing and that
// writes beyond N_TAPS are ignored.
module tb_tdce_cluster_map;
  localparam int N  = 93;
  localparam int NC = 10;
  localparam int MW = $clog2(NC + 1);
  localparam int AW = $clog2(N);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0;
  logic [MW-1:0] wdata = '0;
  logic [MW-1:0] map [N];

  int checks = 0, failures = 0;
  logic [MW-1:0] model [N];

  tdce_cluster_map #(.N_TAPS(N), .N_CLUST(NC)) dut (.clk, .rst_n, .we, .waddr, .wdata, .map);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int k = 0; k < N; k++) begin
      checks++;
      if (map[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("entry %0d: got %0d expected %0d", k, map[k], model[k]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) model[k] = MW'(NC);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    compare();
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      we    = ($urandom_range(0, 2) != 0);
      waddr = AW'($urandom_range(0, 127));
      wdata = MW'($urandom_range(0, NC));
      @(posedge clk);
      if (we && int'(waddr) < N) model[waddr] = wdata;
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
