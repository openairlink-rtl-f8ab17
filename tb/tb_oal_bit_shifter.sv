// tb_oal_bit_shifter: self-checking test of the coarse attenuator.
//
// Sends random complex samples with random shift requests (0..15, so the
// clamp at MAX_SHIFT = 8 is exercised) under random input gaps and random
// output back-pressure.  Each accepted sample's expected output, computed
// here as floor(x / 2^min(j,8)), is queued and compared in order with what
// leaves the block.  A second phase with the output always ready checks the
// one-clock latency.
module tb_oal_bit_shifter;
  timeunit 1ns;
  timeprecision 1ps;
  import oal_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [SHIFT_W-1:0] shift_amt;
  logic in_valid, in_ready, out_valid, out_ready;
  iq_t  in_data, out_data;
  int   checks = 0, failures = 0;
  iq_t  expq[$];
  int   tq[$];
  int   cycle = 0;
  bit   check_latency = 0;
  int   clamp_seen = 0;

  oal_bit_shifter dut (.*);

  always #2.5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic signed [15:0] ref_shift(logic signed [15:0] x, int j);
    int jj = (j > 8) ? 8 : j;
    int v = int'(x);
    // floor division by 2^jj
    if (v >= 0) return 16'(v / (1 << jj));
    else        return 16'(-((-v + (1 << jj) - 1) / (1 << jj)));
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      expq.push_back('{i: ref_shift(in_data.i, int'(shift_amt)), q: ref_shift(in_data.q, int'(shift_amt))});
      tq.push_back(cycle);
      if (shift_amt > 8) clamp_seen++;
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
          $display("FAIL: got %0d/%0d expected %0d/%0d", out_data.i, out_data.q, e.i, e.q);
        end
        if (check_latency) begin
          checks++;
          if (cycle - t != 1) begin failures++; $display("FAIL: latency %0d", cycle - t); end
        end
      end
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; shift_amt = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: random traffic and back-pressure
    repeat (3000) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid  = ($urandom_range(0, 3) != 0);
        in_data   = '{i: 16'($urandom), q: 16'($urandom)};
        shift_amt = SHIFT_W'($urandom_range(0, 15));
      end
      out_ready = ($urandom_range(0, 2) != 0);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    // phase 2: full rate, output always ready, latency checked
    check_latency = 1;
    repeat (200) begin
      @(negedge clk);
      in_valid  = 1;
      in_data   = '{i: 16'($urandom), q: 16'($urandom)};
      shift_amt = SHIFT_W'($urandom_range(0, 8));
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0 || clamp_seen == 0) begin
      failures++; $display("FAIL: %0d outputs missing, clamp_seen=%0d", expq.size(), clamp_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
