// tb_oal_fir_tdl: self-checking test of the tapped-delay-line FIR filter.
//
// A reference model keeps its own history of accepted samples and computes
// y[n] = floor(sum_i b_i x[n-i] / 2^15), saturated to 16 bits, for I and Q.
// Phases: (1) a single path on every tap d = 0..41 with an impulse, which
// must appear exactly d samples later, scaled; (2) random sparse multipath
// channels (up to three paths, as the paper's related work suggests) under
// random input gaps and output back-pressure; (3) saturation with all taps
// at full scale; (4) pass-through mode; (5) the 4-clock latency at full
// rate.  Coefficients change only while the pipeline is empty, so each
// output has one well-defined coefficient set.
module tb_oal_fir_tdl;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;
  localparam int N = 42;

  logic  clk = 1'b0, rst_n = 1'b1;
  coef_t coef [N];
  logic  bypass;
  logic  in_valid, in_ready, out_valid, out_ready;
  iq_t   in_data, out_data;
  int    checks = 0, failures = 0;
  int    cycle = 0;
  bit    check_latency = 0;

  iq_t   hist [N];          // reference delay line
  iq_t   expq[$];
  int    tq[$];
  int    sat_seen = 0;

  oal_fir_tdl #(.N_TAPS(N)) dut (.*);

  always #2.5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic signed [15:0] ref_out(longint acc);
    longint s;
    // floor division by 2^15 of a signed value
    s = (acc >= 0) ? acc / 32768 : -((-acc + 32767) / 32768);
    if (s > 32767)  return 16'sd32767;
    if (s < -32768) return -16'sd32768;
    return 16'(s);
  endfunction

  function automatic iq_t ref_filter();
    longint ai = 0, aq = 0;
    for (int k = 0; k < N; k++) begin
      ai += longint'(hist[k].i) * longint'(coef[k]);
      aq += longint'(hist[k].q) * longint'(coef[k]);
    end
    if (bypass) return hist[0];
    if (ai / 32768 > 32767 || ai / 32768 < -32768) sat_seen++;
    return '{i: ref_out(ai), q: ref_out(aq)};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      for (int k = N-1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = in_data;
      expq.push_back(ref_filter());
      tq.push_back(cycle);
    end
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL: unexpected output");
      end else begin
        iq_t e;
        int  t;
        e = expq.pop_front();
        t = tq.pop_front();
        if (out_data !== e) begin
          failures++;
          if (failures < 10) $display("FAIL @%0d: got %0d/%0d expected %0d/%0d", cycle, out_data.i, out_data.q, e.i, e.q);
        end
        if (check_latency) begin
          checks++;
          if (cycle - t != 4) begin failures++; $display("FAIL: latency %0d", cycle - t); end
        end
      end
    end
  end

  task automatic drain();
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (8) @(negedge clk);
  endtask

  task automatic send(iq_t s, int gap_pct, int bp_pct);
    do begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 99) >= bp_pct);
      in_valid  = ($urandom_range(0, 99) >= gap_pct);
      in_data   = s;
    end while (!in_valid);
    // hold until accepted
    @(posedge clk);
    while (!in_ready) begin
      @(negedge clk); out_ready = ($urandom_range(0, 99) >= bp_pct);
      @(posedge clk);
    end
  endtask

  function automatic iq_t rnd_iq();
    return '{i: 16'($urandom), q: 16'($urandom)};
  endfunction

  initial begin
    for (int k = 0; k < N; k++) begin coef[k] = '0; hist[k] = '0; end
    bypass = 0; in_valid = 0; out_ready = 1; in_data = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // (1) one path per tap: impulse response
    for (int d = 0; d < N; d++) begin
      for (int k = 0; k < N; k++) coef[k] = '0;
      coef[d] = coef_t'($urandom_range(1, 32767));
      send('{i: 16'sd20000, q: -16'sd12345}, 0, 0);
      for (int k = 0; k < N + 2; k++) send('0, 0, 0);
      drain();
    end

    // (2) random sparse multipath, random stalls
    repeat (40) begin
      for (int k = 0; k < N; k++) coef[k] = '0;
      repeat ($urandom_range(1, 3)) coef[$urandom_range(0, N-1)] = coef_t'($urandom_range(0, 65535));
      repeat (60) send(rnd_iq(), 30, 30);
      drain();
    end

    // (3) saturation: every tap at full scale
    for (int k = 0; k < N; k++) coef[k] = COEF_UNITY;
    repeat (60) send('{i: 16'sd30000, q: -16'sd30000}, 0, 0);
    drain();

    // (4) pass-through
    bypass = 1;
    repeat (100) send(rnd_iq(), 20, 20);
    drain();
    bypass = 0;

    // (5) latency at full rate, always ready
    for (int k = 0; k < N; k++) coef[k] = '0;
    coef[3] = 16'sd16384; coef[17] = -16'sd8000; coef[41] = 16'sd1000;
    check_latency = 1;
    repeat (200) begin
      @(negedge clk); in_valid = 1; out_ready = 1; in_data = rnd_iq();
    end
    drain();

    checks++;
    if (expq.size() != 0 || sat_seen == 0) begin
      failures++; $display("FAIL: %0d outputs missing, sat_seen=%0d", expq.size(), sat_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
