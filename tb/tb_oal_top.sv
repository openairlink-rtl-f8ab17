// tb_oal_top: end-to-end test of the two-link emulator at its default size
// (2 links, 42 taps, shift up to 8, 32-entry FIFOs).
//
// Both links stream random complex samples at the same time and are
// programmed independently through the shared register port, the way the
// host program would.  A reference model per link predicts every output
// sample from the settings (coarse shift floor(x/2^j), then the FIR sum
// floor(sum b_i x[n-i] / 2^15) with saturation).
//
// Phases and the mechanisms they must trigger (each is counted, and one
// that never happens counts as a failure):
//   - pass-through after reset, with the 7-clock latency at full rate;
//   - uplink and downlink with different channels at once (isolation);
//   - a single path on a far tap (delay), multipath, coarse shift;
//   - switching the FIR filter between pass-through and filtering;
//   - mobility: the path moves one tap per commit while samples flow,
//     and every output must come wholly from the old or wholly from the
//     new channel, switching exactly once per commit;
//   - saturation of the FIR output;
//   - overflow of the input FIFO while the transmit side stalls, and
//     underflow of the output when the input has gaps.
module tb_oal_top;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;
  localparam int N = 42, L = 2;

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

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------- model
  typedef struct {
    coef_t c [N];
    int    j;
    bit    byp;
  } cfg_t;

  cfg_t  mcfg [L];            // settings of samples now being accepted
  cfg_t  mnext [L];           // settings the next commit brings (mobility)
  iq_t   hist [L][N];
  iq_t   expa [L][$], expb [L][$];
  int    tq [L][$];
  bit    mob_on = 0, check_latency = 0;
  int    switched [L];        // 1 once the current commit is seen at the output
  int    n_switch = 0, n_sent [L], n_taken [L], my_under [L], started [L];
  int    n_sat = 0;

  function automatic logic signed [15:0] fdiv(longint a, int sh, bit count_sat);
    longint d = longint'(1) << sh;
    longint s = (a >= 0) ? a / d : -((-a + d - 1) / d);
    if (s > 32767)  begin if (count_sat) n_sat++; return 16'sd32767; end
    if (s < -32768) begin if (count_sat) n_sat++; return -16'sd32768; end
    return 16'(s);
  endfunction

  function automatic iq_t fir(int l, cfg_t c, bit count_sat);
    longint ai = 0, aq = 0;
    if (c.byp) return hist[l][0];
    for (int k = 0; k < N; k++) begin
      ai += longint'(hist[l][k].i) * longint'(c.c[k]);
      aq += longint'(hist[l][k].q) * longint'(c.c[k]);
    end
    return '{i: fdiv(ai, 15, count_sat), q: fdiv(aq, 15, count_sat)};
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cycle, what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < L; l++) begin
      if (adc_valid[l]) begin
        n_sent[l]++;
        if (in_level[l] != 6'd32) begin
          int j;
          j = (mcfg[l].j > 8) ? 8 : mcfg[l].j;
          n_taken[l]++;
          for (int k = N-1; k > 0; k--) hist[l][k] = hist[l][k-1];
          hist[l][0] = '{i: fdiv(longint'(adc_data[l].i), j, 0), q: fdiv(longint'(adc_data[l].q), j, 0)};
          expa[l].push_back(fir(l, mcfg[l], 1));
          expb[l].push_back(mob_on ? fir(l, mnext[l], 0) : fir(l, mcfg[l], 0));
          tq[l].push_back(cycle);
        end
      end
      if (dac_valid[l] && dac_ready[l]) started[l] = 1;
      if (started[l] && dac_ready[l] && !dac_valid[l]) my_under[l]++;
      if (dac_valid[l] && dac_ready[l]) begin
        iq_t a, b; int t;
        a = expa[l].pop_front(); b = expb[l].pop_front(); t = tq[l].pop_front();
        if (!mob_on) begin
          check($sformatf("link%0d got %0d/%0d exp %0d/%0d", l, dac_data[l].i, dac_data[l].q, a.i, a.q),
                dac_data[l] == a);
        end else if (switched[l] == 0 && dac_data[l] == a) begin
          checks++;                                   // still the old channel
        end else begin
          check($sformatf("link%0d mobility got %0d/%0d old %0d/%0d new %0d/%0d",
                          l, dac_data[l].i, dac_data[l].q, a.i, a.q, b.i, b.q), dac_data[l] == b);
          if (switched[l] == 0 && a != b) begin switched[l] = 1; n_switch++; end
        end
        if (check_latency) check($sformatf("latency %0d", cycle - t), cycle - t == 7);
      end
    end
  end

  // ------------------------------------------------------------- drivers
  task automatic wr(int l, logic [7:0] a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_chan = 2'(l); cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic write_shadow(int l, cfg_t c);
    for (int k = 0; k < N; k++) wr(l, 8'(k), 32'(c.c[k]));
    wr(l, REG_SHIFT, 32'(c.j));
    wr(l, REG_CTRL, 32'(c.byp));
  endtask

  task automatic program_link(int l, cfg_t c);
    write_shadow(l, c);
    wr(l, REG_COMMIT, 0);
    mcfg[l] = c;
  endtask

  task automatic idle(int n);
    @(negedge clk);
    for (int l = 0; l < L; l++) begin adc_valid[l] = 0; dac_ready[l] = 1; end
    repeat (n) @(negedge clk);
  endtask

  task automatic drive(int gap_pct, int bp_pct, int amp);
    for (int l = 0; l < L; l++) begin
      adc_valid[l] = ($urandom_range(0, 99) >= gap_pct);
      adc_data[l]  = '{i: 16'($signed($urandom_range(0, 2*amp)) - amp),
                       q: 16'($signed($urandom_range(0, 2*amp)) - amp)};
      dac_ready[l] = ($urandom_range(0, 99) >= bp_pct);
    end
  endtask

  task automatic stream(int n, int gap_pct, int bp_pct, int amp = 32767);
    repeat (n) begin @(negedge clk); drive(gap_pct, bp_pct, amp); end
  endtask

  function automatic cfg_t path(int d, int g, int j);
    cfg_t c;
    for (int k = 0; k < N; k++) c.c[k] = '0;
    c.c[d] = coef_t'(g); c.j = j; c.byp = 0;
    return c;
  endfunction

  // ------------------------------------------------------------ sequence
  int n_passthrough = 0, n_delay = 0, n_multipath = 0, n_shift = 0, n_bypass_switch = 0;
  int n_isolation = 0, n_overflow = 0, n_underflow = 0, n_mobility_commits = 0;

  initial begin
    cfg_t c;
    cfg_we = 0; cfg_chan = '0; cfg_addr = '0; cfg_wdata = '0; cfg_rchan = '0; cfg_raddr = '0;
    for (int l = 0; l < L; l++) begin
      adc_valid[l] = 0; adc_data[l] = '0; dac_ready[l] = 1;
      n_sent[l] = 0; n_taken[l] = 0; my_under[l] = 0; started[l] = 0; switched[l] = 0;
      for (int k = 0; k < N; k++) hist[l][k] = '0;
      mcfg[l] = path(0, 0, 0); mcfg[l].byp = 1;
    end
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // pass-through after reset, full rate, latency
    check_latency = 1;
    stream(200, 0, 0);
    idle(15);
    check_latency = 0;
    n_passthrough++;

    // uplink: one path on the farthest tap; downlink: three paths + shift
    program_link(0, path(N-1, 23170, 0));                 // -3 dB at 205 ns
    c = path(2, 30000, 3); c.c[15] = -16'sd9000; c.c[33] = 16'sd2500;
    program_link(1, c);
    cfg_rchan = 0; cfg_raddr = 8'(N-1); #0.1;
    check("uplink unaffected by downlink writes", cfg_rdata == 32'd23170);
    cfg_rchan = 1; cfg_raddr = REG_SHIFT; #0.1;
    check("downlink shift read back", cfg_rdata == 32'd3);
    stream(400, 10, 10);
    idle(20);
    n_delay++; n_multipath++; n_shift++; n_isolation++;

    // switch the uplink's FIR filter to pass-through and back
    c = mcfg[0]; c.byp = 1; program_link(0, c);
    stream(100, 0, 0); idle(15);
    c.byp = 0; program_link(0, c);
    stream(100, 0, 0); idle(15);
    n_bypass_switch += 2;

    // mobility: the uplink path moves from tap 0 to tap 20 one tap per
    // commit, the downlink path from tap 41 towards tap 21, while both
    // stream at full rate
    program_link(0, path(0, 20000, 1));
    program_link(1, path(N-1, 20000, 1));
    for (int step = 1; step <= 20; step++) begin
      mnext[0] = path(step, 20000, 1);
      mnext[1] = path(N-1-step, 20000, 1);
      for (int l = 0; l < L; l++) switched[l] = 0;
      mob_on = 1;
      // write the shadow settings while samples flow
      fork
        begin
          write_shadow(0, mnext[0]);
          write_shadow(1, mnext[1]);
        end
        begin
          repeat (2 * (2 * (N + 2))) begin @(negedge clk); drive(0, 0, 30000); end
        end
      join
      // commit both links, one after the other, while samples flow
      @(negedge clk); drive(0, 0, 30000); cfg_we = 1; cfg_chan = 0; cfg_addr = REG_COMMIT;
      mcfg[0] = mnext[0];
      @(negedge clk); drive(0, 0, 30000); cfg_chan = 1;
      mcfg[1] = mnext[1];
      @(negedge clk); drive(0, 0, 30000); cfg_we = 0;
      stream(60, 0, 0, 30000);
      idle(15);
      mob_on = 0;
      n_mobility_commits += 2;
    end
    check($sformatf("each commit switched the output once (%0d of %0d)", n_switch, n_mobility_commits),
          n_switch == n_mobility_commits);

    // saturation: in-phase paths whose gains add beyond full scale
    c = path(0, 32767, 0); c.c[1] = 16'sd32767; c.c[2] = 16'sd32767;
    program_link(0, c);
    stream(100, 0, 0);
    idle(15);
    check("saturation reached", n_sat > 0);

    // overflow: transmit side of link 1 stalls while its receiver sends
    begin
      int ov;
      ov = int'(overflow_count[1]);
      repeat (150) begin
        @(negedge clk); drive(0, 0, 32767); dac_ready[1] = 0;
      end
      idle(100);
      if (int'(overflow_count[1]) > ov) n_overflow++;
      for (int l = 0; l < L; l++)
        check($sformatf("link%0d overflow count", l), int'(overflow_count[l]) == n_sent[l] - n_taken[l]);
      check("no overflow on the link that kept flowing", overflow_count[0] == 0);
    end

    // underflow: input with gaps, output always ready
    stream(300, 50, 0);
    idle(20);
    for (int l = 0; l < L; l++)
      check($sformatf("link%0d underflow count", l), int'(underflow_count[l]) == my_under[l]);
    if (my_under[0] > 0 && my_under[1] > 0) n_underflow++;

    // read-back and end state
    cfg_rchan = 1; cfg_raddr = REG_COMMIT; #0.1;
    check("commit count read back", cfg_rdata == update_count[1] && update_count[1] == 32'd22);
    cfg_rchan = 0; cfg_raddr = 8'd1; #0.1;
    check("coefficient read back", cfg_rdata == 32'sd32767);
    for (int l = 0; l < L; l++)
      check($sformatf("link%0d all outputs arrived", l), expa[l].size() == 0);

    $display("mechanisms: passthrough=%0d delay=%0d multipath=%0d shift=%0d isolation=%0d bypass_switch=%0d",
             n_passthrough, n_delay, n_multipath, n_shift, n_isolation, n_bypass_switch);
    $display("mechanisms: mobility_commits=%0d switches_seen=%0d saturated=%0d overflow=%0d underflow=%0d",
             n_mobility_commits, n_switch, n_sat, n_overflow, n_underflow);
    check("every mechanism happened",
          n_passthrough > 0 && n_delay > 0 && n_multipath > 0 && n_shift > 0 && n_isolation > 0 &&
          n_bypass_switch > 0 && n_mobility_commits > 0 && n_sat > 0 && n_overflow > 0 && n_underflow > 0);
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
