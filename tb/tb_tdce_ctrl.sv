// tb_tdce_ctrl: self-checking test of the filter sequencer.
// A cycle-by-cycle monitor checks the rules the datapath relies on:
//   - shift_en is exactly an accepted input (in_valid && in_ready);
//   - each sum_load follows exactly DECIM accepted samples;
//   - sum_load is followed at once by N_CLUST MAC cycles with indices
//     0..N_CLUST-1 in order and mac_first only on index 0;
//   - each MAC run yields exactly one out_load, on the cycle after it;
//   - out_valid stays high until out_ready; every result is handed off once.
// Phase 1 streams continuously into a ready sink and checks the period of
// DECIM + 1 + N_CLUST = 13 cycles per output (0.154 samples per clock).
// Phase 2 uses random input gaps and random back-pressure and must see the
// controller hold in SUM while a result is still waiting.
module tb_tdce_ctrl;
  localparam int NC = 10;
  localparam int D  = 2;
  localparam int IW = $clog2(NC + 1);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          in_valid = 1'b0;
  logic          in_ready;
  logic          shift_en, sum_load, mac_en, mac_first, out_load;
  logic [IW-1:0] clust_idx;
  logic          out_valid;
  logic          out_ready = 1'b0;

  int checks = 0, failures = 0;

  tdce_ctrl #(.N_CLUST(NC), .DECIM(D)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .shift_en, .sum_load, .mac_en,
    .mac_first, .clust_idx, .out_load, .out_valid, .out_ready
  );

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("%0t: %s", $time, msg);
    end
  endtask

  // ------------------------------------------------------------- monitor
  int  shifts = 0;        // accepted samples since last sum_load
  int  mac_next = -1;     // expected next MAC index, -1 = none expected
  bit  expect_load = 0;   // out_load expected (once) after a MAC run
  int  results = 0, handoffs = 0, loads = 0;
  int  held_sum = 0;      // cycles spent waiting in SUM on a pending result
  bit  prev_valid = 0, prev_ready = 0;
  int  last_load_t = -1, cyc = 0;
  int  periods [$];

  always @(posedge clk) if (rst_n) begin
    cyc++;
    check(shift_en == (in_valid && in_ready), "shift_en differs from accepted input");
    if (shift_en) shifts++;
    check(!(in_ready && mac_en), "input accepted during MAC");
    // output valid must not drop without a handshake
    if (prev_valid && !prev_ready) check(out_valid, "out_valid dropped without out_ready");
    if (out_valid && out_ready) handoffs++;
    // MAC sequencing
    if (mac_next >= 0) begin
      check(mac_en && int'(clust_idx) == mac_next && mac_first == (mac_next == 0),
            $sformatf("MAC index %0d expected, got en=%0b idx=%0d", mac_next, mac_en, clust_idx));
      if (mac_next == NC - 1) begin
        mac_next = -1;
        results++;
      end else mac_next++;
    end else begin
      check(!mac_en, "unexpected MAC cycle");
    end
    // result hand-off into the output register
    if (out_load) begin
      check(expect_load, "out_load without a finished result");
      expect_load = 0;
      loads++;
      if (last_load_t >= 0) periods.push_back(cyc - last_load_t);
      last_load_t = cyc;
    end
    if (mac_en && int'(clust_idx) == NC - 1) expect_load = 1;
    if (sum_load) begin
      check(shifts == D, $sformatf("sum_load after %0d samples", shifts));
      shifts = 0;
      mac_next = 0;
    end
    if (!in_ready && !mac_en && !sum_load && mac_next < 0) held_sum++;
    prev_valid = out_valid;
    prev_ready = out_ready;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // phase 1: continuous stream, ready sink
    in_valid  = 1'b1;
    out_ready = 1'b1;
    repeat (20 * (D + 1 + NC)) @(posedge clk);
    @(negedge clk);
    checks++;
    if (periods.size() < 10) begin
      failures++;
      $display("only %0d outputs in phase 1", periods.size());
    end
    foreach (periods[i]) check(periods[i] == D + 1 + NC,
                                $sformatf("output period %0d cycles, expected %0d", periods[i], D + 1 + NC));
    $display("phase 1: %0d outputs, period %0d cycles per %0d samples", periods.size(),
             (periods.size() > 0) ? periods[0] : 0, D);
    // phase 2: random gaps and back-pressure
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0);
      out_ready = ($urandom_range(0, 9) < (((t / 500) % 2) != 0 ? 1 : 7));
    end
    // drain
    @(negedge clk);
    in_valid  = 1'b0;
    out_ready = 1'b1;
    repeat (40) @(posedge clk);
    #1;
    check(results == loads, $sformatf("%0d results but %0d out_loads", results, loads));
    check(loads == handoffs, $sformatf("%0d out_loads but %0d hand-offs", loads, handoffs));
    check(held_sum > 0, "never held in SUM on a pending result");
    $display("results=%0d handoffs=%0d held_sum_cycles=%0d", results, handoffs, held_sum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
