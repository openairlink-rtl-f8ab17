// tb_oal_channel: self-checking test of one emulated link.
//
// Two links are built from the same stimulus: one with the bit shift before
// the FIR filter (the default) and one with the opposite order.  All
// settings go through the register port, as a host would write them.  A
// reference model per link (coarse shift as floor(x/2^j), FIR as
// floor(sum b_i x[n-i] / 2^15) with saturation) predicts every output
// sample, and outputs are compared in order.
// Mechanisms made to happen and counted: pass-through after reset, a
// single delayed path on taps 0..41, multipath, coarse shift, overflow of
// the input FIFO while the transmit side stalls (the model follows which
// samples were taken from the input FIFO's fill level), underflow of the output when the input has gaps.
// The 7-clock pass-through latency is checked at full rate.
// Settings change only while no samples are in flight.
module tb_oal_channel;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;
  localparam int N = 42;

  logic        clk = 1'b0, rst_n = 1'b1;
  logic        adc_valid;
  iq_t         adc_data;
  logic        dac_ready;
  logic        dac_valid [2];
  iq_t         dac_data  [2];
  logic        cfg_we;
  logic [7:0]  cfg_addr, cfg_raddr;
  logic [31:0] cfg_wdata;
  logic [31:0] cfg_rdata [2], update_count [2], overflow_count [2], underflow_count [2];
  logic [5:0]  in_level [2], out_level [2];
  int checks = 0, failures = 0, cycle = 0;

  // model state
  coef_t m_coef [N];
  int    m_shift;
  bit    m_bypass;
  iq_t   hist [2][N];
  iq_t   expq0[$], expq1[$];
  int    tq0[$];
  bit    check_latency = 0;
  int    n_sent = 0, n_taken = 0, n_recv0 = 0, my_underflow = 0, started = 0;
  int    n_overflow_events = 0, n_multipath = 0, n_shift = 0, n_delay = 0, n_passthrough = 0;

  oal_channel #(.SHIFT_FIRST(1'b1)) dut0 (
    .clk, .rst_n, .adc_valid, .adc_data, .dac_valid(dac_valid[0]), .dac_ready,
    .dac_data(dac_data[0]), .cfg_we, .cfg_addr, .cfg_wdata, .cfg_raddr,
    .cfg_rdata(cfg_rdata[0]), .update_count(update_count[0]),
    .overflow_count(overflow_count[0]), .underflow_count(underflow_count[0]),
    .in_level(in_level[0]), .out_level(out_level[0]));
  oal_channel #(.SHIFT_FIRST(1'b0)) dut1 (
    .clk, .rst_n, .adc_valid, .adc_data, .dac_valid(dac_valid[1]), .dac_ready,
    .dac_data(dac_data[1]), .cfg_we, .cfg_addr, .cfg_wdata, .cfg_raddr,
    .cfg_rdata(cfg_rdata[1]), .update_count(update_count[1]),
    .overflow_count(overflow_count[1]), .underflow_count(underflow_count[1]),
    .in_level(in_level[1]), .out_level(out_level[1]));

  always #2.5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic signed [15:0] fdiv(longint a, int sh);
    longint d = longint'(1) << sh;
    longint s = (a >= 0) ? a / d : -((-a + d - 1) / d);
    if (s > 32767)  return 16'sd32767;
    if (s < -32768) return -16'sd32768;
    return 16'(s);
  endfunction

  function automatic iq_t shf(iq_t x);
    int j = (m_shift > 8) ? 8 : m_shift;
    return '{i: fdiv(longint'(x.i), j), q: fdiv(longint'(x.q), j)};
  endfunction

  function automatic iq_t fir(int l);
    longint ai = 0, aq = 0;
    if (m_bypass) return hist[l][0];
    for (int k = 0; k < N; k++) begin
      ai += longint'(hist[l][k].i) * longint'(m_coef[k]);
      aq += longint'(hist[l][k].q) * longint'(m_coef[k]);
    end
    return '{i: fdiv(ai, 15), q: fdiv(aq, 15)};
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cycle, what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (adc_valid) begin
      n_sent++;
      if (in_level[0] != 6'd32) begin
        n_taken++;
        for (int k = N-1; k > 0; k--) begin hist[0][k] = hist[0][k-1]; hist[1][k] = hist[1][k-1]; end
        hist[0][0] = shf(adc_data);
        hist[1][0] = adc_data;
        expq0.push_back(fir(0));
        expq1.push_back(shf(fir(1)));
        tq0.push_back(cycle);
      end
    end
    if (dac_valid[0] && dac_ready) started = 1;
    if (started && dac_ready && !dac_valid[0]) my_underflow++;
    if (dac_valid[0] && dac_ready) begin
      iq_t e; int t;
      n_recv0++;
      e = expq0.pop_front(); t = tq0.pop_front();
      check($sformatf("link0 got %0d/%0d exp %0d/%0d", dac_data[0].i, dac_data[0].q, e.i, e.q), dac_data[0] == e);
      if (check_latency) check($sformatf("latency %0d", cycle - t), cycle - t == 7);
    end
    if (dac_valid[1] && dac_ready) begin
      iq_t e;
      e = expq1.pop_front();
      check($sformatf("link1 got %0d/%0d exp %0d/%0d", dac_data[1].i, dac_data[1].q, e.i, e.q), dac_data[1] == e);
    end
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // program a channel: coefficients, shift, pass-through bit, then commit
  task automatic program_link(coef_t c [N], int j, bit byp);
    for (int k = 0; k < N; k++) if (c[k] != m_coef[k] || c[k] != 0) wr(8'(k), 32'(c[k]));
    wr(REG_SHIFT, 32'(j));
    wr(REG_CTRL, 32'(byp));
    wr(REG_COMMIT, 0);
    m_coef = c; m_shift = j; m_bypass = byp;
  endtask

  task automatic idle(int n);
    @(negedge clk); adc_valid = 0; dac_ready = 1;
    repeat (n) @(negedge clk);
  endtask

  task automatic stream(int n, int gap_pct, int bp_pct);
    repeat (n) begin
      @(negedge clk);
      adc_valid = ($urandom_range(0, 99) >= gap_pct);
      adc_data  = '{i: 16'($urandom), q: 16'($urandom)};
      dac_ready = ($urandom_range(0, 99) >= bp_pct);
    end
  endtask

  coef_t c [N];

  initial begin
    adc_valid = 0; adc_data = '0; dac_ready = 1; cfg_we = 0; cfg_addr = '0; cfg_wdata = '0; cfg_raddr = '0;
    for (int k = 0; k < N; k++) begin m_coef[k] = '0; hist[0][k] = '0; hist[1][k] = '0; end
    m_shift = 0; m_bypass = 1;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // pass-through straight after reset, full rate, latency checked
    check_latency = 1;
    stream(300, 0, 0);
    n_passthrough++;
    idle(20);
    check_latency = 0;

    // one path on each tap, with gaps and back-pressure
    for (int d = 0; d < N; d++) begin
      for (int k = 0; k < N; k++) c[k] = '0;
      c[d] = coef_t'($urandom_range(1, 32767));
      program_link(c, 0, 0);
      stream(80, 10, 10);
      n_delay++;
      idle(20);
    end

    // multipath (2-3 paths) plus coarse shift
    repeat (20) begin
      for (int k = 0; k < N; k++) c[k] = '0;
      repeat ($urandom_range(2, 3)) c[$urandom_range(0, N-1)] = coef_t'($urandom_range(0, 65535));
      program_link(c, $urandom_range(0, 15), 0);
      if (m_shift > 0) n_shift++;
      n_multipath++;
      stream(150, 20, 20);
      idle(20);
    end

    // overflow: the transmit side stops while the receiver keeps sending
    begin
      int ov0;
      ov0 = int'(overflow_count[0]);
      repeat (200) begin
        @(negedge clk); adc_valid = 1; adc_data = '{i: 16'($urandom), q: 16'($urandom)}; dac_ready = 0;
      end
      idle(100);
      if (int'(overflow_count[0]) > ov0) n_overflow_events++;
      check("overflow counted as dropped samples", int'(overflow_count[0]) == n_sent - n_taken);
      check("both links drop alike", overflow_count[0] == overflow_count[1]);
    end

    // underflow: input with gaps, output always ready
    stream(300, 50, 0);
    idle(30);
    check("underflow counted", int'(underflow_count[0]) == my_underflow && my_underflow > 0);
    check("all outputs arrived", expq0.size() == 0 && expq1.size() == 0);
    check("commit count", int'(update_count[0]) == N + 20);
    cfg_raddr = REG_SHIFT; #0.1;
    check("read back shift", cfg_rdata[0] == 32'(m_shift));

    check("every mechanism exercised",
          n_passthrough > 0 && n_delay == N && n_multipath > 0 && n_shift > 0 && n_overflow_events > 0);
    $display("mechanisms: passthrough=%0d delay_taps=%0d multipath=%0d shift=%0d overflow=%0d underflow_clocks=%0d",
             n_passthrough, n_delay, n_multipath, n_shift, n_overflow_events, my_underflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
