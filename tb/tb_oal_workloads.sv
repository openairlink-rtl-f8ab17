// tb_oal_workloads: the emulator's evaluation scenarios, run on the full
// two-link design at its default size.
//
// 1. Path delay across the whole range: one path on tap d = 0..41 (0 to
//    205 ns at 200 MHz).  As a lab measurement would, the test sends a
//    random signal and finds the delay as the lag of the largest
//    cross-correlation between input and output; it must be d plus the
//    fixed 7-clock pipeline latency.  The uplink uses tap d and the
//    downlink tap 41-d at the same time.
// 2. Attenuation: configured attenuations of 0, 8, ..., 80 dB and the
//    path losses 63 to 73 dB in 1 dB steps.  A host-side mapping splits
//    G dB into a coarse shift j = min(8, floor(G / 6.0206)) and a
//    coefficient b = round((2^15-1) * 10^(-(G - 6.0206 j)/20)).  The
//    measured power ratio between a full-scale random input and the output
//    must match G within 0.25 dB up to 64 dB and within 1 dB above, where
//    the output is only a few LSB and truncation shows.
// 3. Mobility at the update rate the paper reports, 1000 channel updates
//    per second: at 200 MHz one commit every 200,000 clocks, the path
//    moving one tap (1.5 m) per update, which is the 1500 m/s maximum
//    speed.  After each commit the delay is measured again; the uplink
//    moves away, the downlink closes in, both streaming continuously.
module tb_oal_workloads;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;
  localparam int N = 42, L = 2, M = 512, LAT = 7;

  logic        clk = 1'b0, rst_n = 1'b1;
  logic        adc_valid [L];
  iq_t         adc_data  [L];
  logic        dac_valid [L];
  logic        dac_ready [L];
  iq_t         dac_data  [L];
  logic        cfg_we;
  logic [1:0]  cfg_chan, cfg_rchan;
  logic [7:0]  cfg_addr, cfg_raddr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [31:0] update_count [L], overflow_count [L], underflow_count [L];
  logic [5:0]  in_level [L], out_level [L];

  oal_top dut (.*);

  always #2.5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Capture of inputs and outputs, indexed by clock.
  localparam int CAP = 8192;
  iq_t  cap_in  [L][CAP];
  iq_t  cap_out [L][CAP];
  bit   cap_ov  [L][CAP];
  int   cap_t0 = 0;
  bit   capturing = 0;

  always @(posedge clk) if (capturing && cycle - cap_t0 < CAP) begin
    for (int l = 0; l < L; l++) begin
      cap_in[l][cycle - cap_t0]  = adc_valid[l] ? adc_data[l] : '0;
      cap_out[l][cycle - cap_t0] = dac_data[l];
      cap_ov[l][cycle - cap_t0]  = dac_valid[l];
    end
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(int l, logic [7:0] a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_chan = 2'(l); cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // one path on tap d with coefficient b, shift j
  task automatic set_path(int l, int d, int b, int j);
    for (int k = 0; k < N; k++) wr(l, 8'(k), (k == d) ? 32'(b) : 32'd0);
    wr(l, REG_SHIFT, 32'(j));
    wr(l, REG_CTRL, 32'd0);
    wr(l, REG_COMMIT, 32'd0);
  endtask

  // stream n clocks of full-rate random samples with amplitude amp
  task automatic run(int n, int amp);
    @(negedge clk);
    cap_t0 = cycle + 1; capturing = 1;
    repeat (n) begin
      for (int l = 0; l < L; l++) begin
        adc_valid[l] = 1;
        adc_data[l]  = '{i: 16'($signed($urandom_range(0, 2*amp)) - amp),
                         q: 16'($signed($urandom_range(0, 2*amp)) - amp)};
      end
      @(negedge clk);
    end
    for (int l = 0; l < L; l++) adc_valid[l] = 0;
    repeat (N + 20) @(negedge clk);
    capturing = 0;
  endtask

  function automatic int xcorr_lag(int l, int n);
    real best = -1.0;
    int  lag = -1;
    for (int s = 0; s < N + 20; s++) begin
      real acc = 0.0;
      for (int t = 0; t < n; t++) begin
        acc += real'(cap_in[l][t].i) * real'(cap_out[l][t + s].i)
             + real'(cap_in[l][t].q) * real'(cap_out[l][t + s].q);
      end
      if (acc < 0) acc = -acc;
      if (acc > best) begin best = acc; lag = s; end
    end
    return lag;
  endfunction

  // host-side mapping of an attenuation in dB to (shift, coefficient)
  function automatic void att_cfg(real g, output int j, output int b);
    real res;
    j = int'($floor(g / 6.0206));
    if (j > 8) j = 8;
    res = g - 6.0206 * j;
    b = int'(32767.0 * $pow(10.0, -res / 20.0) + 0.5);
    if (b < 1) b = 1;
    if (b > 32767) b = 32767;               // largest coefficient is 2^15-1
  endfunction

  real levels [$];

  initial begin
    cfg_we = 0; cfg_chan = '0; cfg_addr = '0; cfg_wdata = '0; cfg_rchan = '0; cfg_raddr = '0;
    for (int l = 0; l < L; l++) begin adc_valid[l] = 0; adc_data[l] = '0; dac_ready[l] = 1; end
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. path delay sweep
    for (int d = 0; d < N; d++) begin
      set_path(0, d, 32767, 0);
      set_path(1, N-1-d, 32767, 0);
      run(M, 20000);
      for (int l = 0; l < L; l++) begin
        int want, got;
        want = ((l == 0) ? d : N-1-d) + LAT;
        got  = xcorr_lag(l, M);
        check($sformatf("link%0d tap %0d: delay %0d clocks, expected %0d", l, (l == 0) ? d : N-1-d, got, want),
              got == want);
      end
    end
    $display("delay sweep: taps 0..%0d measured (%0d..%0d ns beyond the pipeline)", N-1, 0, (N-1)*5);

    // ---- 2. attenuation sweep
    for (int g = 0; g <= 80; g += 8) levels.push_back(real'(g));
    for (int g = 63; g <= 73; g++) levels.push_back(real'(g));
    foreach (levels[n]) begin
      int  j, b;
      real pin, pout, meas, tol;
      att_cfg(levels[n], j, b);
      set_path(0, 5, b, j);
      set_path(1, 5, b, j);
      run(2048, 32767);
      for (int l = 0; l < L; l++) begin
        pin = 0.0; pout = 0.0;
        for (int t = 0; t < 2048; t++) begin
          pin  += real'(cap_in[l][t].i) ** 2 + real'(cap_in[l][t].q) ** 2;
          pout += real'(cap_out[l][t + 5 + LAT].i) ** 2 + real'(cap_out[l][t + 5 + LAT].q) ** 2;
        end
        meas = (pout > 0.0) ? 10.0 * $log10(pin / pout) : 999.0;
        tol  = (levels[n] <= 64.0) ? 0.25 : 1.0;
        if (l == 0) $display("attenuation %5.1f dB: shift %0d, b %5d, measured %7.3f dB", levels[n], j, b, meas);
        check($sformatf("link%0d attenuation %0.1f dB measured %0.3f", l, levels[n], meas),
              meas > levels[n] - tol && meas < levels[n] + tol);
      end
    end
    // ---- 3. mobility at 1000 updates per second
    begin
      int t_commit, t_prev, writes;
      t_prev = -1;
      for (int step = 0; step < 5; step++) begin
        int t_start;
        t_start = cycle;
        set_path(0, 10 + step, 32767, 0);
        set_path(1, 30 - step, 32767, 0);
        t_commit = cycle;
        writes = (t_commit - t_start) / 2;
        check($sformatf("update of %0d register writes fits between updates", writes), t_commit - t_start < 200000);
        if (t_prev >= 0)
          check($sformatf("update interval %0d clocks", t_commit - t_prev), t_commit - t_prev == 200000);
        t_prev = t_commit;
        run(M, 20000);
        check($sformatf("moving uplink at step %0d", step), xcorr_lag(0, M) == 10 + step + LAT);
        check($sformatf("moving downlink at step %0d", step), xcorr_lag(1, M) == 30 - step + LAT);
        // keep streaming until the next update is due
        if (step < 4) begin
          @(negedge clk);
          while (cycle < t_commit + 200000 - (t_commit - t_start)) begin
            for (int l = 0; l < L; l++) begin
              adc_valid[l] = 1;
              adc_data[l]  = '{i: 16'($urandom), q: 16'($urandom)};
            end
            @(negedge clk);
          end
          for (int l = 0; l < L; l++) adc_valid[l] = 0;
        end
      end
      $display("mobility: 5 updates, 200000 clocks apart (1 ms at 200 MHz), one tap (1.5 m) each");
    end

    check("no sample lost", overflow_count[0] == 0 && overflow_count[1] == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
