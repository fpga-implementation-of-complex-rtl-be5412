// tb_tdce_centroid_mem: self-checking test of the centroid table.
// Random writes (some out of range, some with we low) are mirrored in a model;
// after each clock every address, including out-of-range ones that must read
// zero, is read back through the combinational read port.
module tb_tdce_centroid_mem;
  import tdce_pkg::*;

  localparam int NC = 10;
  localparam int AW = $clog2(NC + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0;
  cplx_t         wdata = '0;
  logic [AW-1:0] raddr = '0;
  cplx_t         rdata;

  int checks = 0, failures = 0;
  cplx_t model [NC];

  tdce_centroid_mem #(.N_CLUST(NC)) dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int a = 0; a < (1 << AW); a++) begin
      cplx_t exp_v;
      raddr = AW'(a);
      #1;
      exp_v = (a < NC) ? model[a] : '0;
      checks++;
      if (rdata !== exp_v) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h expected %h", a, rdata, exp_v);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) model[c] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    compare_all();
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      we       = ($urandom_range(0, 3) != 0);
      waddr    = AW'($urandom_range(0, (1 << AW) - 1));
      wdata.re = sample_t'($urandom);
      wdata.im = sample_t'($urandom);
      @(posedge clk);
      if (we && int'(waddr) < NC) model[waddr] = wdata;
      #1 compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
