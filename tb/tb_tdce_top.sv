// tb_tdce_top: end-to-end test of one clustered-filter unit at its default
// size (93 taps, 10 clusters, 2 samples per symbol in, 1 out).
//
// The testbench plays the part of the offline design flow: it computes the
// truncated chromatic-dispersion filter
//   g_k = sqrt(j*a) * exp(-j*pi*a*k^2),  a = c*T^2 / (D*lambda^2*z),
// for a 32 GBaud signal at 2 samples per symbol (T = 15.625 ps),
// D = 16.8 ps/(nm km), lambda = 1550 nm and z = 80 km per span, groups the
// taps into clusters with a plain k-means in the complex plane, quantises the
// centroids to the 14-bit format and writes map and centroids through the
// configuration port. It then streams random samples and compares every
// output, bit for bit, with a direct-form FIR it evaluates itself: each tap
// multiplied by its own (centroid) coefficient, summed in 64-bit integers,
// shifted right by 9 bits toward minus infinity and clamped. Because this
// reference never forms cluster sums, it checks the factorisation too.
//
// Phases and the mechanisms they must exercise (each counted; one that never
// happens is a failure):
//   1  4-span filter, continuous input, ready sink: output period must be
//      13 cycles per 2 samples and the latency 13 cycles;
//   2  random input gaps and random back-pressure, with stretches of long
//      back-pressure that make the unit hold its next result;
//   3  full-scale input that drives the output into saturation (out_sat);
//   4  reconfiguration to the 1-span (29 taps, 9 clusters) and 2-span
//      (49 taps, 10 clusters) filters, whose surplus taps are switched off.
// For information it also prints how far the clustered filter's output is
// from that of the unclustered quantised taps.
module tb_tdce_top;
  import tdce_pkg::*;

  localparam int N   = N_TAPS_DEF;
  localparam int NC  = N_CLUST_DEF;
  localparam int D   = DECIM_DEF;
  localparam int AW  = $clog2(N);
  localparam int MW  = $clog2(NC + 1);
  localparam int PERIOD  = D + 1 + NC;
  localparam int LATENCY = NC + 3;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          in_valid = 1'b0;
  logic          in_ready;
  cplx_t         in_data = '0;
  logic          out_valid;
  logic          out_ready = 1'b0;
  cplx_t         out_data;
  logic          out_sat;
  logic          cfg_we = 1'b0;
  cfg_sel_e      cfg_sel = CFG_MAP;
  logic [AW-1:0] cfg_addr = '0;
  cplx_t         cfg_data = '0;

  tdce_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready,
    .out_data, .out_sat, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ filter design (offline)
  int  cur_map   [N];      // cluster of each tap, NC = unused
  int  cent_re   [NC];     // quantised centroids
  int  cent_im   [NC];
  int  tap_re    [N];      // quantised unclustered taps, for information
  int  tap_im    [N];

  function automatic int q14(real v);
    int r = int'($floor(v * 512.0 + 0.5));
    if (r > 8191)  r = 8191;
    if (r < -8192) r = -8192;
    return r;
  endfunction

  // Truncated CD filter of nt taps for `spans` spans, clustered into nc groups.
  task automatic design_filter(input int spans, input int nt, input int nc);
    real c0 = 299792458.0, lam = 1550.0e-9, dd = 16.8e-6, tt = 1.0 / 64.0e9;
    real z = 80.0e3 * spans;
    real a = c0 * tt * tt / (dd * lam * lam * z);
    real pi = 3.14159265358979;
    real gr [N], gi [N];
    real cr [NC], ci [NC], sr [NC], si [NC];
    int  cnt [NC];
    for (int k = 0; k < N; k++) begin
      gr[k] = 0.0; gi[k] = 0.0; tap_re[k] = 0; tap_im[k] = 0;
    end
    for (int k = 0; k < nt; k++) begin
      real m   = real'(k - (nt - 1) / 2);
      real ph  = pi / 4.0 - pi * a * m * m;
      gr[k]    = $sqrt(a) * $cos(ph);
      gi[k]    = $sqrt(a) * $sin(ph);
      tap_re[k] = q14(gr[k]);
      tap_im[k] = q14(gi[k]);
    end
    // k-means in the complex plane, seeded evenly around the circle
    for (int c = 0; c < nc; c++) begin
      cr[c] = $sqrt(a) * $cos(2.0 * pi * c / nc);
      ci[c] = $sqrt(a) * $sin(2.0 * pi * c / nc);
    end
    for (int it = 0; it < 40; it++) begin
      for (int c = 0; c < nc; c++) begin sr[c] = 0.0; si[c] = 0.0; cnt[c] = 0; end
      for (int k = 0; k < nt; k++) begin
        real best = 1.0e30;
        int  bc = 0;
        for (int c = 0; c < nc; c++) begin
          real d2 = (gr[k] - cr[c]) ** 2 + (gi[k] - ci[c]) ** 2;
          if (d2 < best) begin best = d2; bc = c; end
        end
        cur_map[k] = bc;
        sr[bc] += gr[k]; si[bc] += gi[k]; cnt[bc]++;
      end
      for (int c = 0; c < nc; c++)
        if (cnt[c] > 0) begin cr[c] = sr[c] / cnt[c]; ci[c] = si[c] / cnt[c]; end
    end
    for (int k = nt; k < N; k++) cur_map[k] = NC;   // switched off
    for (int c = 0; c < NC; c++) begin
      cent_re[c] = (c < nc) ? q14(cr[c]) : 0;
      cent_im[c] = (c < nc) ? q14(ci[c]) : 0;
    end
  endtask

  task automatic cfg_write(input cfg_sel_e sel, input int addr, input int re, input int im);
    @(negedge clk);
    cfg_we      = 1'b1;
    cfg_sel     = sel;
    cfg_addr    = AW'(addr);
    cfg_data.re = sample_t'(re);
    cfg_data.im = sample_t'(im);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic load_filter();
    for (int k = 0; k < N; k++) cfg_write(CFG_MAP, k, cur_map[k], 0);
    for (int c = 0; c < NC; c++) cfg_write(CFG_CENT, c, cent_re[c], cent_im[c]);
  endtask

  // ------------------------------------------------------ reference model
  int  hist_re [$];
  int  hist_im [$];
  longint exp_re [$], exp_im [$];
  bit     exp_sat [$];
  int     exp_acc_t [$];
  real    err_pow = 0.0, sig_pow = 0.0;

  function automatic longint floor_clamp(longint v, inout bit s);
    longint q = v >>> SAMPLE_FRAC;
    if (q > 8191)  begin q = 8191;  s = 1'b1; end
    if (q < -8192) begin q = -8192; s = 1'b1; end
    return q;
  endfunction

  int cyc = 0;
  int phase = 0;
  int n_acc = 0;
  int n_out = 0, n_gap = 0, n_bp = 0, n_hold = 0, n_sat = 0, n_cfg = 0, n_unused_runs = 0;
  int ready_low_run = 0;
  int last_out_t = -1;
  int periods_bad = 0, periods_seen = 0, lat_bad = 0, lat_seen = 0;
  bit prev_valid = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
  end

  // monitor: inputs accepted, outputs taken
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      hist_re.push_front(int'(in_data.re));
      hist_im.push_front(int'(in_data.im));
      n_acc++;
      if (n_acc % D == 0) begin
        longint ar, ai, fr, fi;
        bit s;
        ar = 0; ai = 0; fr = 0; fi = 0; s = 0;
        for (int k = 0; k < N && k < hist_re.size(); k++) begin
          if (cur_map[k] < NC) begin
            ar += longint'(cent_re[cur_map[k]]) * hist_re[k] - longint'(cent_im[cur_map[k]]) * hist_im[k];
            ai += longint'(cent_re[cur_map[k]]) * hist_im[k] + longint'(cent_im[cur_map[k]]) * hist_re[k];
            fr += longint'(tap_re[k]) * hist_re[k] - longint'(tap_im[k]) * hist_im[k];
            fi += longint'(tap_re[k]) * hist_im[k] + longint'(tap_im[k]) * hist_re[k];
          end
        end
        exp_re.push_back(floor_clamp(ar, s));
        exp_im.push_back(floor_clamp(ai, s));
        exp_sat.push_back(s);
        exp_acc_t.push_back(cyc);
        if (phase != 3) begin
          err_pow += real'(ar - fr) ** 2 + real'(ai - fi) ** 2;
          sig_pow += real'(fr) ** 2 + real'(fi) ** 2;
        end
      end
      if (hist_re.size() > N) begin
        void'(hist_re.pop_back());
        void'(hist_im.pop_back());
      end
    end
    if (in_ready && !in_valid) n_gap++;
    if (out_valid && !out_ready) n_bp++;
    ready_low_run = in_ready ? 0 : ready_low_run + 1;
    if (ready_low_run == NC + 2) n_hold++;    // longer than SUM + MAC: holding
    // latency of a fresh output in phase 1
    if (out_valid && !prev_valid && phase == 1 && exp_acc_t.size() > 0) begin
      lat_seen++;
      if (cyc - exp_acc_t[0] != LATENCY) begin
        lat_bad++;
        if (lat_bad < 4) $display("latency %0d cycles, expected %0d", cyc - exp_acc_t[0], LATENCY);
      end
    end
    if (out_valid && out_ready) begin
      if (exp_re.size() == 0) begin
        check(1'b0, "output without a matching input symbol");
      end else begin
        longint er, ei, gr, gi;
        bit     es;
        er = exp_re.pop_front();
        ei = exp_im.pop_front();
        es = exp_sat.pop_front();
        gr = longint'(out_data.re);
        gi = longint'(out_data.im);
        void'(exp_acc_t.pop_front());
        check(gr == er && gi == ei && out_sat == es,
              $sformatf("output %0d: got (%0d,%0d,sat %0b) expected (%0d,%0d,sat %0b)",
                        n_out, gr, gi, out_sat, er, ei, es));
        if (out_sat) n_sat++;
        if (phase == 4) n_unused_runs++;
      end
      n_out++;
      if (phase == 1) begin
        if (last_out_t >= 0) begin
          periods_seen++;
          if (cyc - last_out_t != PERIOD) periods_bad++;
        end
        last_out_t = cyc;
      end
    end
    prev_valid = out_valid && !out_ready;
  end

  task automatic drain();
    @(negedge clk);
    in_valid  = 1'b0;
    out_ready = 1'b1;
    repeat (3 * PERIOD) @(posedge clk);
    check(exp_re.size() == 0, $sformatf("%0d outputs missing after drain", exp_re.size()));
  endtask

  task automatic stream(input int n_samples, input int amp, input int p_gap, input int p_bp);
    int sent = 0;
    while (sent < n_samples) begin
      @(negedge clk);
      if (in_valid && in_ready) sent++;    // accepted at the edge just past
      if (sent >= n_samples) break;
      if (!(in_valid && !in_ready)) begin  // keep a stalled sample unchanged
        in_valid    = ($urandom_range(0, 99) >= p_gap);
        in_data.re  = sample_t'($signed($urandom_range(0, 2 * amp)) - amp);
        in_data.im  = sample_t'($signed($urandom_range(0, 2 * amp)) - amp);
      end
      out_ready = ($urandom_range(0, 99) >= p_bp);
    end
    in_valid = 1'b0;
  endtask

  // Samples whose phases undo those of the taps they will meet: sample i of a
  // burst of N ends at delay-line position N-1-i, so the outputs computed
  // around the end of each burst add up in phase and exceed the output range.
  task automatic stream_matched(input int bursts);
    for (int b = 0; b < bursts; b++) begin
      for (int i = 0; i < N; i++) begin
        int  c = cur_map[N - 1 - i];
        real th = (c < NC) ? $atan2(real'(cent_im[c]), real'(cent_re[c])) : 0.0;
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid   = 1'b1;
        out_ready  = 1'b1;
        in_data.re = sample_t'(q14(15.0 * $cos(-th)));
        in_data.im = sample_t'(q14(15.0 * $sin(-th)));
        @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    for (int k = 0; k < N; k++) cur_map[k] = NC;
    for (int c = 0; c < NC; c++) begin cent_re[c] = 0; cent_im[c] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 4-span filter: 93 taps, 10 clusters
    design_filter(4, N, NC);
    load_filter();
    n_cfg++;

    phase = 1;                                // continuous stream
    stream(2 * 60, 1024, 0, 0);
    drain();
    check(periods_seen > 20 && periods_bad == 0,
          $sformatf("%0d of %0d output periods differ from %0d cycles", periods_bad, periods_seen, PERIOD));
    check(lat_seen > 20 && lat_bad == 0,
          $sformatf("%0d of %0d latencies differ from %0d cycles", lat_bad, lat_seen, LATENCY));
    $display("4 spans: period %0d cycles per %0d samples (%0.3f samples/clock), latency %0d cycles",
             PERIOD, D, real'(D) / PERIOD, LATENCY);

    phase = 2;                                // gaps and back-pressure
    for (int r = 0; r < 6; r++) stream(2 * 40, 2048, 30, (r % 2) ? 85 : 30);
    drain();
    $display("clustered vs unclustered taps (4 spans): error power %0.1f dB",
             10.0 * $log10((err_pow + 1.0e-9) / (sig_pow + 1.0e-9)));

    phase = 3;                                // full-scale input
    stream(2 * 60, 8191, 10, 10);
    stream_matched(2);
    drain();

    phase = 4;                                // shorter filters, taps switched off
    design_filter(1, 29, 9);
    load_filter();
    n_cfg++;
    stream(2 * 40, 2048, 20, 20);
    drain();
    design_filter(2, 49, 10);
    load_filter();
    n_cfg++;
    stream(2 * 40, 2048, 20, 20);
    drain();

    $display("outputs=%0d input_gaps=%0d backpressure=%0d holds=%0d saturated=%0d reconfigs=%0d short_filter_outputs=%0d",
             n_out, n_gap, n_bp, n_hold, n_sat, n_cfg, n_unused_runs);
    check(n_gap > 0,  "input gap never happened");
    check(n_bp > 0,   "back-pressure never happened");
    check(n_hold > 0, "unit never held a result under back-pressure");
    check(n_sat > 0,  "output saturation never happened");
    check(n_cfg == 3, "reconfiguration count wrong");
    check(n_unused_runs > 0, "short filter with switched-off taps never ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
