// tb_tdce_delay_line: self-checking test of the filter delay line.
// Random samples are shifted in with shift_en toggling at random; a model
// array kept by the testbench (newest first) is compared with every tap after
// each clock edge. Reset clearing the line is checked too.
module tb_tdce_delay_line;
  import tdce_pkg::*;

  localparam int N = 93;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  shift_en = 1'b0;
  cplx_t din = '0;
  cplx_t taps [N];

  int checks = 0, failures = 0;
  cplx_t model [N];

  tdce_delay_line #(.N_TAPS(N)) dut (.clk, .rst_n, .shift_en, .din, .taps);

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
      if (taps[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("tap %0d: got %h expected %h", k, taps[k], model[k]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) model[k] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    compare();
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      shift_en = ($urandom_range(0, 3) != 0);
      din.re   = sample_t'($urandom);
      din.im   = sample_t'($urandom);
      @(posedge clk);
      if (shift_en) begin
        for (int k = N - 1; k > 0; k--) model[k] = model[k-1];
        model[0] = din;
      end
      #1 compare();
    end
    // synchronous reset clears everything
    @(negedge clk) rst_n = 1'b0;
    @(posedge clk);
    #1 for (int k = 0; k < N; k++) model[k] = '0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
